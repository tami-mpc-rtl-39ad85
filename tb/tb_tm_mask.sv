// tb_tm_mask: checks that the masked word is <lt_j> xor <r_j> on both
// outputs, that a word is only taken while the randomness is valid, and
// that the buffer frees only after both outputs have been taken, in either
// order.
module tb_tm_mask;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 8, P = 64;
  logic lt_valid, lt_ready, r_valid, tx_valid, tx_ready, mk_valid, mk_ready;
  logic [N-1:0][P-1:0] lt_data, r_single, tx_data, mk_data, expw;
  int checks = 0, failures = 0;

  tm_mask dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    lt_valid = 0; r_valid = 0; tx_ready = 0; mk_ready = 0; lt_data = '0; r_single = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 12; w++) begin
      for (int j = 0; j < N; j++) begin lt_data[j] = {$urandom, $urandom}; r_single[j] = {$urandom, $urandom}; end
      expw = lt_data ^ r_single;
      @(negedge clk);
      lt_valid = 1;
      repeat (2) begin
        @(negedge clk);
        check(!lt_ready, "taken without randomness");
      end
      r_valid = 1;
      #1 check(lt_ready, "ready with randomness");
      @(negedge clk);
      lt_valid = 0; r_valid = 0;
      check(tx_valid && mk_valid, "both outputs offered");
      check(tx_data == expw && mk_data == expw, $sformatf("word %0d masked value", w));
      if (w % 2) tx_ready = 1; else mk_ready = 1;
      @(negedge clk);
      tx_ready = 0; mk_ready = 0;
      r_valid = 1;
      #1 check(!lt_ready, "buffer held until both taken");
      check((w % 2) ? (!tx_valid && mk_valid) : (tx_valid && !mk_valid), "one side taken");
      r_valid = 0;
      if (w % 2) mk_ready = 1; else tx_ready = 1;
      @(negedge clk);
      tx_ready = 0; mk_ready = 0;
      check(!tx_valid && !mk_valid, "buffer empty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
