// tb_polymult_eval: two-party check of the packed polynomial evaluation for
// the default product of all eight leaf bits and for the three-row, four-
// variable exponent matrix of the paper's reuse example
// [1 3 0 2; 0 2 1 2; 1 1 2 0].
module tb_polymult_eval;
  import polymult_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  function automatic exp_mat_t fig_matrix();
    exp_mat_t e;
    e = '0;
    e[0][0] = 1; e[0][1] = 3; e[0][2] = 0; e[0][3] = 2;
    e[1][0] = 0; e[1][1] = 2; e[1][2] = 1; e[1][3] = 2;
    e[2][0] = 1; e[2][1] = 1; e[2][2] = 2; e[2][3] = 0;
    return e;
  endfunction
  localparam logic [7:0][15:0] ACT_PROD = {112'h0, 16'h00ff};
  localparam logic [7:0][15:0] ACT_FIG  = {80'h0, 16'b0111, 16'b1110, 16'b1011};

  int c0, f0, c1, f1;
  logic d0, d1;
  int checks, failures;

  tb_pm_pair #(.M(1), .N(8), .ACT(ACT_PROD), .EXP(product_matrix(8)), .LC(4)) u_prod (
    .clk(clk), .rst_n(rst_n), .checks(c0), .failures(f0), .finished(d0));
  tb_pm_pair #(.M(3), .N(4), .ACT(ACT_FIG), .EXP(fig_matrix()), .LC(3)) u_fig (
    .clk(clk), .rst_n(rst_n), .checks(c1), .failures(f1), .finished(d1));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1 + 2;
    failures = f0 + f1;
    // the reuse count of the paper's example: N_opt = 21, N_final = 13
    if (num_rand_noreuse(fig_matrix(), 3, 4) != 21) begin failures++; $display("FAIL: N_opt"); end
    if (num_rand(fig_matrix(), 3, 4) != 13) begin failures++; $display("FAIL: N_final"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
