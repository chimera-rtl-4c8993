// Testbench for tac_weight_buffer: a producer fills halves with random
// weight vectors and a consumer reads and releases them at random rates.
// Every tile read must equal the tile written, in order; the producer must
// be able to fill one half while the other is being read (double
// buffering), and must be held off while both halves are full.
module tb_tac_weight_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, wr_ready, rd_valid, rd_release;
  logic [3:0] wr_pe;
  logic [63:0][7:0] wr_data;
  logic [15:0][63:0][7:0] rd_data;
  logic [15:0][63:0][7:0] tiles [$];
  logic [15:0][63:0][7:0] cur;
  int checks = 0, failures = 0, overlap = 0, held = 0, consumed = 0;

  tac_weight_buffer dut (.clk_i(clk), .rst_ni(rst_n), .wr_en_i(wr_en), .wr_pe_i(wr_pe), .wr_data_i(wr_data),
                         .wr_ready_o(wr_ready), .rd_valid_o(rd_valid), .rd_data_o(rd_data),
                         .rd_release_i(rd_release));

  // producer
  initial begin
    wr_en = 0; wr_pe = 0; wr_data = '0;
    @(posedge rst_n);
    for (int t = 0; t < 40; t++) begin
      for (int p = 0; p < 16; p++) begin
        @(negedge clk);
        while (!wr_ready) begin held++; @(negedge clk); end
        wr_en = 1; wr_pe = 4'(p);
        for (int i = 0; i < 64; i++) wr_data[i] = 8'($urandom);
        cur[p] = wr_data;
        @(posedge clk);
        if (rd_valid) overlap++;
        #1 wr_en = 0;
      end
      tiles.push_back(cur);
    end
  end

  // consumer
  initial begin
    rd_release = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (consumed < 40) begin
      @(negedge clk);
      rd_release = 0;
      if (rd_valid && ($urandom % ((consumed < 20) ? 60 : 2) == 0)) begin
        checks++;
        if (tiles.size() == 0 || rd_data != tiles[0]) begin failures++; $display("tile %0d mismatch", consumed); end
        void'(tiles.pop_front());
        rd_release = 1;
        consumed++;
      end
    end
    @(negedge clk); rd_release = 0;
    checks++; if (overlap == 0) begin failures++; $display("no write during a read"); end
    checks++; if (held == 0) begin failures++; $display("producer never held off"); end
    checks++; if (rd_valid) begin failures++; $display("buffer not empty at the end"); end
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
