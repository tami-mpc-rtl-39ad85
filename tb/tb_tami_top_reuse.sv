// tb_tami_top_reuse: end-to-end run with the three-row, four-variable
// exponent matrix of the paper's randomness-reuse example
// [1 3 0 2; 0 2 1 2; 1 1 2 0] (16-bit comparisons in four 4-bit chunks,
// 128 comparisons per packed batch). The 13 distinct subset-product shares
// serve 21 subset terms, so several shares are each used by two or three
// rows. Two output words, party 0 then party 1. See tb_top_driver.
module tb_tami_top_reuse;
  import tami_pkg::*;
  import polymult_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  function automatic exp_mat_t fig_matrix();
    exp_mat_t e;
    e = '0;
    e[0][0] = 1; e[0][1] = 3; e[0][3] = 2;
    e[1][1] = 2; e[1][2] = 1; e[1][3] = 2;
    e[2][0] = 1; e[2][1] = 1; e[2][2] = 2;
    return e;
  endfunction
  localparam logic [7:0][15:0] ACT_FIG = {80'h0, 16'b0111, 16'b1110, 16'b1011};

  logic rst_n, party, req_valid, req_ready, x_valid, x_ready, m_valid, m_ready;
  logic rnd_valid, rnd_ready, tx_valid, tx_ready, s_valid, s_ready, out_valid, out_ready;
  logic mask_wait, rand_wait;
  crh_req_t req;
  logic [127:0] x_data;
  logic [511:0] m_data, out_data;
  logic [127:0] rnd_data;
  logic [3:0][127:0] tx_data, s_data;

  tami_top #(.M(3), .N(4), .EXP(fig_matrix())) dut (.*);

  tb_top_driver #(.M(3), .N(4), .ACT(ACT_FIG), .OUT_WORDS(2)) drv (.*);

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule
