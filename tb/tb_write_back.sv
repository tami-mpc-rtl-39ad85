// tb_write_back: writes 24 batch results with random gaps and output
// backpressure and checks that each 512-bit word holds eight consecutive
// results, batch b of the word in bits [b*64 +: 64].
module tb_write_back;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data;
  logic [511:0] out_data;
  logic [63:0] res [24];
  int checks = 0, failures = 0;

  write_back dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 24; i++) res[i] = {$urandom, $urandom};
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < 24; i++) begin
        @(negedge clk);
        repeat ($urandom % 2) @(negedge clk);
        in_data = res[i]; in_valid = 1;
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
      end
      for (int o = 0; o < 3; o++) begin
        do begin
          @(negedge clk);
          out_ready = ($urandom % 3 == 0);
          @(posedge clk);
        end while (!(out_valid && out_ready));
        for (int b = 0; b < 8; b++) begin
          checks++;
          if (out_data[b*64 +: 64] != res[o*8 + b]) begin failures++; $display("FAIL: word %0d batch %0d", o, b); end
        end
        #1 out_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
