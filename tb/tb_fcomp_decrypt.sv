// tb_fcomp_decrypt: feeds random hash batches, chunk values x and message
// words and checks every output bit against m[q*16 + x_q] xor (low bit of
// the q-th hash). Messages are offered before the masks are complete so the
// mask wait is exercised, and the output is held under backpressure.
module tb_fcomp_decrypt;
  import tami_pkg::*;
  localparam int L = LEAF_PER_W, K = CHUNK_K, LN = CRH_LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_valid, h_ready, x_valid, x_ready, m_valid, m_ready, lt_valid, lt_ready, mask_wait;
  blk_t [LN-1:0] h_data;
  logic [L*K-1:0] x_data;
  logic [L*(1<<K)-1:0] m_data;
  logic [L-1:0] lt_data;
  int checks = 0, failures = 0, waits = 0;

  fcomp_decrypt dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (mask_wait) waits++;

  initial begin
    logic [L-1:0] u, exp_lt;
    h_valid = 0; x_valid = 0; m_valid = 0; lt_ready = 0;
    h_data = '0; x_data = '0; m_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 8; w++) begin
      for (int q = 0; q < L*K/32; q++) x_data[q*32 +: 32] = $urandom;
      for (int q = 0; q < L*(1<<K)/32; q++) m_data[q*32 +: 32] = $urandom;
      @(negedge clk);
      x_valid = 1; m_valid = 1;
      for (int b = 0; b < L/LN; b++) begin
        for (int l = 0; l < LN; l++) begin
          h_data[l] = {$urandom, $urandom, $urandom, $urandom};
          u[b*LN + l] = h_data[l][0];
        end
        h_valid = 1;
        @(posedge clk);
        checks++;
        if (!h_ready) begin failures++; $display("FAIL: hash not taken"); end
        checks++;
        if (x_ready) begin failures++; $display("FAIL: decrypted before all masks"); end
        @(negedge clk);
        h_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      for (int q = 0; q < L; q++) exp_lt[q] = m_data[q*(1<<K) + int'(x_data[q*K +: K])] ^ u[q];
      while (!lt_valid) @(negedge clk);
      x_valid = 0; m_valid = 0;
      repeat (w % 3) begin
        checks++;
        if (!lt_valid || lt_data != exp_lt) begin failures++; $display("FAIL: output not held"); end
        @(negedge clk);
      end
      checks++;
      if (!lt_valid || lt_data != exp_lt) begin
        failures++; $display("FAIL: word %0d got %h expected %h", w, lt_data, exp_lt);
      end
      lt_ready = 1;
      @(negedge clk);
      lt_ready = 0;
    end
    checks++;
    if (waits == 0) begin failures++; $display("FAIL: mask wait never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
