// tb_frame_ram: random writes and reads on both read ports of a small
// two-bank frame store, checked against an array model with one cycle of
// read latency.
module tb_frame_ram;
  localparam int W = 8, H = 4;
  logic clk = 0;
  logic wr_en = 0, wr_bank = 0, rda_bank = 0, rdb_bank = 0;
  logic [4:0] wr_addr = 0, rda_addr = 0, rdb_addr = 0;
  logic [7:0] wr_data = 0, rda_data, rdb_data;
  logic [7:0] model [2][W*H];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frame_ram #(.W(W), .H(H), .BANKS(2)) dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data,
    .rda_bank, .rda_addr, .rda_data, .rdb_bank, .rdb_addr, .rdb_data);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [7:0] ea, eb;
    // fill
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < W*H; a++) begin
        @(negedge clk); wr_en = 1; wr_bank = 1'(b); wr_addr = 5'(a); wr_data = 8'($urandom); model[b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      rda_bank = 1'($urandom); rda_addr = 5'($urandom % (W*H));
      rdb_bank = 1'($urandom); rdb_addr = 5'($urandom % (W*H));
      ea = model[rda_bank][rda_addr]; eb = model[rdb_bank][rdb_addr];
      wr_en = 1'($urandom); wr_bank = 1'($urandom); wr_addr = 5'($urandom % (W*H)); wr_data = 8'($urandom);
      @(posedge clk); #1;
      // read-before-write: a read of the address being written returns the old data
      checks++; if (rda_data != ea) begin failures++; $display("A %0d/%0d got %h exp %h", rda_bank, rda_addr, rda_data, ea); end
      checks++; if (rdb_data != eb) begin failures++; $display("B %0d/%0d got %h exp %h", rdb_bank, rdb_addr, rdb_data, eb); end
      if (wr_en) model[wr_bank][wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
