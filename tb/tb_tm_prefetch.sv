// tb_tm_prefetch: streams the shares of five batches into the two banks
// and releases them at random times. Checks that a bank becomes readable
// only when full, holds the shares in arrival order, serves the singleton
// shares at the addresses of the subsets {j}, that the writer runs a bank
// ahead of the reader (prefetch) and stalls only when both banks are full.
module tb_tm_prefetch;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NR = 255, P = 64, N = 8;
  logic wr_valid, wr_ready, rd_valid, rd_release;
  logic [P-1:0] wr_data;
  logic [NR-1:0][P-1:0] rd_shares;
  logic [N-1:0][P-1:0] rd_singles;
  int checks = 0, failures = 0;
  logic [P-1:0] sh [5][NR];
  int n_written = 0, n_stall = 0;

  tm_prefetch dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (wr_valid && !wr_ready) n_stall++;

  initial begin
    for (int b = 0; b < 5; b++) for (int k = 0; k < NR; k++) sh[b][k] = {$urandom, $urandom};
    wr_valid = 0; rd_release = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int b = 0; b < 5; b++)
        for (int k = 0; k < NR; k++) begin
          @(negedge clk);
          wr_data = sh[b][k]; wr_valid = 1;
          do @(posedge clk); while (!wr_ready);
          n_written++;
          #1 wr_valid = 0;
        end
      for (int b = 0; b < 5; b++) begin
        @(negedge clk);
        while (!rd_valid) begin
          checks++;
          if (n_written >= NR * (b + 1)) begin failures++; $display("FAIL: full bank not readable"); end
          @(negedge clk);
        end
        checks++;
        if (n_written < NR * (b + 1)) begin failures++; $display("FAIL: bank readable before full"); end
        repeat (NR + 20 + $urandom % 100) @(negedge clk);
        if (b < 4) begin
          checks++;
          if (n_written != NR * (b + 2)) begin
            failures++; $display("FAIL: next bank not prefetched (%0d written)", n_written);
          end
        end
        for (int k = 0; k < NR; k++) begin
          checks++;
          if (rd_shares[k] != sh[b][k]) begin failures++; $display("FAIL: batch %0d share %0d", b, k); end
        end
        for (int j = 0; j < N; j++) begin
          checks++;
          if (rd_singles[j] != sh[b][(1 << j) - 1]) begin failures++; $display("FAIL: batch %0d single %0d", b, j); end
        end
        rd_release = 1;
        @(negedge clk);
        rd_release = 0;
      end
    join
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: writer never stalled on two full banks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
