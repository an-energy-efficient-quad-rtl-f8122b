// hamming_dist: Hamming distance of two descriptors.
//
// hdist = number of set bits of a XOR b, by a loop-generated adder tree.
// This is the "distance computing" step of the stereo matcher. The
// descriptor width is the paper's 256 bits. Combinational.
module hamming_dist #(
  parameter int unsigned NBITS = 256
) (
  input  logic [NBITS-1:0]           a,
  input  logic [NBITS-1:0]           b,
  output logic [$clog2(NBITS+1)-1:0] hdist
);
  logic [NBITS-1:0] d;
  always_comb begin
    d = a ^ b;
    hdist = '0;
    for (int i = 0; i < NBITS; i++) hdist += ($clog2(NBITS+1))'(d[i]);
  end
endmodule
