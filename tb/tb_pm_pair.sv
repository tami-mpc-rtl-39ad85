// tb_pm_pair: drives two polymult_eval instances, one per party, with
// shares of the same random subset products, and checks that the two output
// shares XOR to the polynomial of the true leaf bits, that each share
// matches a direct evaluation of the share equation, and the evaluation
// latency of ceil(T/LC)+1 cycles. The exponent matrix is given as rows of
// active bits so the check does not reuse the design's package functions.
module tb_pm_pair #(
  parameter int unsigned M = 1,
  parameter int unsigned N = 8,
  parameter logic [7:0][15:0] ACT = '0,     // ACT[i][j]: E[i][j] > 0
  parameter polymult_pkg::exp_mat_t EXP = '0,
  parameter int unsigned LC = 4,
  parameter int unsigned P = 64,
  parameter int unsigned BATCHES = 6
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  // used subsets, in increasing mask order, and the number of terms
  function automatic int count_used();
    int c;
    c = 0;
    for (int s = 1; s < (1 << N); s++) begin
      bit u;
      u = 0;
      for (int i = 0; i < M; i++) if ((s & ~int'(ACT[i])) == 0) u = 1;
      if (u) c++;
    end
    return c;
  endfunction
  function automatic int count_terms();
    int c;
    c = 0;
    for (int i = 0; i < M; i++) c += 1 << $countones(ACT[i][N-1:0]);
    return c;
  endfunction
  localparam int NR = count_used();
  localparam int T  = count_terms();

  logic [1:0] in_valid, in_ready, out_valid, rel;
  logic [N-1:0][P-1:0] tv;
  logic [1:0][NR-1:0][P-1:0] sh;
  logic [1:0][P-1:0] res;
  logic out_ready;

  for (genvar p = 0; p < 2; p++) begin : g_party
    polymult_eval #(.M(M), .N(N), .EXP(EXP), .LC(LC), .P(P)) dut (
      .clk(clk), .rst_n(rst_n), .party(1'(p)),
      .in_valid(in_valid[p]), .in_ready(in_ready[p]), .t(tv), .shares(sh[p]),
      .release_bank(rel[p]), .out_valid(out_valid[p]), .out_ready(out_ready),
      .out_res(res[p]));
  end

  initial begin
    logic [N-1:0][P-1:0] lt, r;
    logic [NR-1:0][P-1:0] rs;
    logic [P-1:0] f, prod, exp0;
    int k, lat;
    checks = 0; failures = 0; finished = 0;
    in_valid = '0; out_ready = 0; tv = '0; sh = '0;
    @(posedge rst_n);
    for (int b = 0; b < BATCHES; b++) begin
      for (int j = 0; j < N; j++)
        for (int c = 0; c < P; c++) begin
          lt[j][c] = 1'($urandom);
          // early batches: many ones so products are not always zero
          lt[j][c] = (b < 3) ? ($urandom % 8 != 0) : lt[j][c];
          r[j][c]  = 1'($urandom);
        end
      k = 0;
      for (int s = 1; s < (1 << N); s++) begin
        bit u;
        u = 0;
        for (int i = 0; i < M; i++) if ((s & ~int'(ACT[i])) == 0) u = 1;
        if (u) begin
          for (int c = 0; c < P; c++) begin
            rs[k][c] = 1'b1;
            for (int j = 0; j < N; j++) if (s[j]) rs[k][c] = rs[k][c] & r[j][c];
          end
          sh[0][k] = {$urandom, $urandom};
          sh[1][k] = sh[0][k] ^ rs[k];
          k++;
        end
      end
      for (int j = 0; j < N; j++) tv[j] = lt[j] ^ r[j];
      // true polynomial
      f = '0;
      for (int i = 0; i < M; i++) begin
        prod = '1;
        for (int j = 0; j < N; j++) if (ACT[i][j]) prod = prod & lt[j];
        f = f ^ prod;
      end
      // party 0 share straight from the share equation
      exp0 = '0;
      for (int i = 0; i < M; i++)
        for (int s = 1; s < (1 << N); s++)
          if ((s & ~int'(ACT[i])) == 0) begin
            int a;
            a = 0;
            for (int q = 1; q < s; q++) begin
              bit u;
              u = 0;
              for (int i2 = 0; i2 < M; i2++) if ((q & ~int'(ACT[i2])) == 0) u = 1;
              if (u) a++;
            end
            prod = sh[0][a];
            for (int j = 0; j < N; j++) if (ACT[i][j] && !s[j]) prod = prod & tv[j];
            exp0 = exp0 ^ prod;
          end
      @(negedge clk);
      in_valid = 2'b11;
      @(posedge clk);
      checks++; if (in_ready != 2'b11) begin failures++; $display("FAIL: not ready"); end
      @(negedge clk);
      in_valid = 2'b00;
      lat = 1;
      while (out_valid != 2'b11) begin @(negedge clk); lat++; end
      checks++;
      if (lat != (T + LC - 1) / LC + 1) begin
        failures++; $display("FAIL: latency %0d expected %0d", lat, (T + LC - 1) / LC + 1);
      end
      checks++;
      if ((res[0] ^ res[1]) != f) begin
        failures++; $display("FAIL: batch %0d reconstructed %h expected %h", b, res[0] ^ res[1], f);
      end
      checks++;
      if (res[0] != exp0) begin failures++; $display("FAIL: batch %0d party-0 share", b); end
      if (b == 0) $display("M=%0d N=%0d: %0d shares, %0d terms, %0d ones in result", M, N, NR, T, $countones(f));
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    finished = 1;
  end
endmodule
