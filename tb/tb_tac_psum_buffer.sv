// Testbench for tac_psum_buffer: random writes and reads against a model
// array, including reading the entry written in the same cycle (old value).
module tb_tac_psum_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [5:0] wa, ra;
  logic [15:0][25:0] wd, rd;
  logic [15:0][25:0] model [64];
  bit valid [64];
  int checks = 0, failures = 0;

  tac_psum_buffer dut (.clk_i(clk), .we_i(we), .waddr_i(wa), .wdata_i(wd), .raddr_i(ra), .rdata_o(rd));

  initial begin
    we = 0; wa = 0; ra = 0; wd = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; wa = 6'(i); for (int l = 0; l < 16; l++) wd[l] = 26'($urandom);
      model[i] = wd; valid[i] = 1;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = $urandom % 2; wa = 6'($urandom); ra = ($urandom % 4 == 0) ? wa : 6'($urandom);
      for (int l = 0; l < 16; l++) wd[l] = 26'($urandom);
      #1;
      checks++;
      if (rd != model[ra]) begin failures++; $display("row %0d mismatch", ra); end
      @(posedge clk);
      if (we) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
