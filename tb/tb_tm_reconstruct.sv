// tb_tm_reconstruct: joins own mask words and sender terms arriving in
// either order and with output backpressure, and checks t = mask xor term
// for every word, in order, none lost or repeated.
module tb_tm_reconstruct;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 8, P = 64, W = 20;
  logic mk_valid, mk_ready, s_valid, s_ready, t_valid, t_ready;
  logic [N-1:0][P-1:0] mk_data, s_data, t_data;
  logic [N-1:0][P-1:0] mks [W], ss [W];
  int checks = 0, failures = 0;

  tm_reconstruct dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < W; w++)
      for (int j = 0; j < N; j++) begin mks[w][j] = {$urandom, $urandom}; ss[w][j] = {$urandom, $urandom}; end
    mk_valid = 0; s_valid = 0; t_ready = 0; mk_data = '0; s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int w = 0; w < W; w++) begin
        @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        mk_data = mks[w]; mk_valid = 1;
        do @(posedge clk); while (!mk_ready);
        #1 mk_valid = 0;
      end
      for (int w = 0; w < W; w++) begin
        @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        s_data = ss[w]; s_valid = 1;
        do @(posedge clk); while (!s_ready);
        #1 s_valid = 0;
      end
      for (int w = 0; w < W; w++) begin
        do begin
          @(negedge clk);
          t_ready = ($urandom % 2);
          @(posedge clk);
        end while (!(t_valid && t_ready));
        checks++;
        if (t_data != (mks[w] ^ ss[w])) begin failures++; $display("FAIL: word %0d", w); end
        #1 t_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
