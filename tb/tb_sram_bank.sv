// Testbench for sram_bank: random reads and byte-masked writes against a
// model; read data must appear exactly one cycle after the request.
module tb_sram_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we;
  logic [10:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] model [2048];
  int checks = 0, failures = 0;

  sram_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    automatic logic [31:0] exp_q;
    automatic bit pend = 0;
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 11'(i); be = 4'hf; wdata = $urandom; model[i] = wdata;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp_q) begin failures++; $display("read %h expected %h", rdata, exp_q); end
      end
      req = $urandom % 4 != 0; we = $urandom % 2; addr = 11'($urandom % 64); be = 4'($urandom); wdata = $urandom;
      pend = req && !we;
      exp_q = model[addr];
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
