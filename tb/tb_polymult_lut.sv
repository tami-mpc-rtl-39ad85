// tb_polymult_lut: reads the whole term table for the paper's reuse example
// (m = 3 rows, n = 4 variables, exponents [1 3 0 2; 0 2 1 2; 1 1 2 0]) and
// for the default eight-variable product, and checks that every row's
// subsets appear once, that equal subsets share one address, that the
// addresses are dense and ordered by subset mask, and that the number of
// distinct randomness addresses is 13 (the paper's N_final) and 255.
module tb_polymult_lut;
  import polymult_pkg::*;

  function automatic exp_mat_t fig_matrix();
    exp_mat_t e;
    e = '0;
    e[0][0] = 1; e[0][1] = 3; e[0][3] = 2;
    e[1][1] = 2; e[1][2] = 1; e[1][3] = 2;
    e[2][0] = 1; e[2][1] = 1; e[2][2] = 2;
    return e;
  endfunction

  localparam int LC = 2;
  logic [5:0] base_f;
  logic [LC-1:0] v_f, p_f;
  logic [LC-1:0][3:0] s_f, t_f;
  logic [LC-1:0][3:0] a_f;
  logic [8:0] base_d;
  logic [LC-1:0] v_d, p_d;
  logic [LC-1:0][7:0] s_d, t_d, a_d;

  polymult_lut #(.M(3), .N(4), .EXP(fig_matrix()), .LC(LC)) u_fig (
    .base(base_f), .valid(v_f), .pub(p_f), .smask(s_f), .tmask(t_f), .addr(a_f));
  polymult_lut u_def (
    .base(base_d), .valid(v_d), .pub(p_d), .smask(s_d), .tmask(t_d), .addr(a_d));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addr_of [256];
    int n_valid, n_pub, n_addr, maxa;
    int unsigned rows [3];
    rows[0] = 4'b1011; rows[1] = 4'b1110; rows[2] = 4'b0111;
    // ---- the paper's example ----
    foreach (addr_of[i]) addr_of[i] = -1;
    n_valid = 0; n_pub = 0; n_addr = 0;
    for (int b = 0; b < 28; b += LC) begin
      base_f = 6'(b);
      #1;
      for (int l = 0; l < LC; l++) begin
        int tix, row;
        tix = b + l;
        check(v_f[l] == (tix < 24), $sformatf("valid of term %0d", tix));
        if (tix < 24) begin
          n_valid++;
          row = tix / 8;
          check((s_f[l] & t_f[l]) == 0, "subset and public factors disjoint");
          check(int'(s_f[l] | t_f[l]) == rows[row], $sformatf("term %0d covers row %0d", tix, row));
          if (p_f[l]) n_pub++;
          check(p_f[l] == (s_f[l] == 0), "public flag");
          if (!p_f[l]) begin
            if (addr_of[s_f[l]] < 0) begin addr_of[s_f[l]] = int'(a_f[l]); n_addr++; end
            else check(addr_of[s_f[l]] == int'(a_f[l]), "reused subset has one address");
          end
        end
      end
    end
    check(n_valid == 24, "24 terms");
    check(n_pub == 3, "one public term per row");
    check(n_addr == 13, $sformatf("%0d distinct shares, expected 13", n_addr));
    maxa = -1;
    for (int s = 1; s < 16; s++)
      if (addr_of[s] >= 0) begin
        check(addr_of[s] == maxa + 1, "addresses dense in mask order");
        maxa = addr_of[s];
      end
    // ---- default product of 8 leaf bits ----
    foreach (addr_of[i]) addr_of[i] = -1;
    n_valid = 0;
    for (int b = 0; b < 260; b += LC) begin
      base_d = 9'(b);
      #1;
      for (int l = 0; l < LC; l++)
        if (v_d[l]) begin
          n_valid++;
          check(int'(s_d[l]) == b + l, "default order is the subset mask");
          check(t_d[l] == ~s_d[l], "public factors are the complement");
          if (!p_d[l]) check(int'(a_d[l]) == b + l - 1, "default address is mask - 1");
        end
    end
    check(n_valid == 256, "256 terms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
