// tb_data_type_adapter: feeds batches of 16 leaf-share words (4 comparisons
// of 8 chunks each) with random gaps and checks the transposed packed word:
// out[j][c] = chunk j of comparison c, comparison c = word*4 + position.
module tb_data_type_adapter;
  import tami_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [LEAF_PER_W-1:0] in_data;
  logic [N_CHUNKS-1:0][PACK_P-1:0] out_data;
  int checks = 0, failures = 0;
  localparam int WPB = PACK_P / (LEAF_PER_W / N_CHUNKS);

  data_type_adapter dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LEAF_PER_W-1:0] words [WPB];
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      for (int w = 0; w < WPB; w++) begin
        words[w] = $urandom;
        @(negedge clk);
        in_data = words[w]; in_valid = 1;
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
        checks++;
        if (out_valid != (w == WPB - 1)) begin failures++; $display("FAIL: out_valid after word %0d", w); end
        repeat ($urandom % 2) @(negedge clk);
      end
      repeat (b) begin
        @(negedge clk);
        checks++;
        if (in_ready) begin failures++; $display("FAIL: accepts while full"); end
      end
      for (int c = 0; c < PACK_P; c++)
        for (int j = 0; j < N_CHUNKS; j++) begin
          checks++;
          if (out_data[j][c] != words[c / 4][(c % 4) * N_CHUNKS + j]) begin
            failures++; $display("FAIL: batch %0d comparison %0d chunk %0d", b, c, j);
          end
        end
      @(negedge clk);
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
