// tb_tami_top: end-to-end run of the accelerator at its default size
// (32-bit comparisons in eight 4-bit chunks, 64 comparisons per packed
// batch, the product of all eight leaf bits as the tree-merge polynomial).
// Three output words = 24 batches = 1536 comparisons, the first output word
// as party 0 and the rest as party 1. See tb_top_driver for the checks.
module tb_tami_top;
  import tami_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, party, req_valid, req_ready, x_valid, x_ready, m_valid, m_ready;
  logic rnd_valid, rnd_ready, tx_valid, tx_ready, s_valid, s_ready, out_valid, out_ready;
  logic mask_wait, rand_wait;
  crh_req_t req;
  logic [127:0] x_data;
  logic [511:0] m_data, out_data;
  logic [63:0] rnd_data;
  logic [7:0][63:0] tx_data, s_data;

  tami_top dut (.*);

  tb_top_driver #(.OUT_WORDS(3)) drv (.*);

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
