// tb_tree_merge: drives the receiver's tree merge with 16 packed batches
// (64 comparisons x 8 chunk shares each), the randomness stream and the
// sender's released terms, and checks the masked words sent out, the
// output shares against the share equation, the reconstruction with the
// sender's share against the product of the eight leaf bits, that no batch
// is masked before the previous one released its bank (64 evaluation
// cycles for 256 terms on 4 units), and that batches then follow at the
// rate of the randomness stream.
module tb_tree_merge;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 8, P = 64, NR = 255, B = 16;
  logic party = 0;
  logic lt_valid, lt_ready, rnd_valid, rnd_ready, tx_valid, tx_ready, s_valid, s_ready;
  logic out_valid, out_ready, rand_wait;
  logic [N-1:0][P-1:0] lt_data, tx_data, s_data;
  logic [P-1:0] rnd_data;
  logic [511:0] out_data;
  int checks = 0, failures = 0, cyc = 0;

  tree_merge dut (.*);

  logic [N-1:0][P-1:0] ltR [B], ltS [B];
  logic [P-1:0] shR [B][NR], shS [B][NR];
  logic [P-1:0] expR [B], expS [B], f [B];
  int t_s [B], t_tx [B];
  int n_rand_wait = 0;
  always @(posedge clk) begin
    cyc++;
    if (rand_wait) n_rand_wait++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // data: subset s (1..255) at address s-1; the product uses every subset
    for (int b = 0; b < B; b++) begin
      logic [N-1:0][P-1:0] lt, r, t;
      logic [P-1:0] pr;
      for (int j = 0; j < N; j++) begin
        for (int c = 0; c < P; c++) lt[j][c] = ($urandom % 12) != 0;
        r[j] = {$urandom, $urandom};
        ltS[b][j] = {$urandom, $urandom};
        ltR[b][j] = lt[j] ^ ltS[b][j];
      end
      for (int s = 1; s < 256; s++) begin
        pr = '1;
        for (int j = 0; j < N; j++) if (s[j]) pr = pr & r[j];
        shR[b][s-1] = {$urandom, $urandom};
        shS[b][s-1] = shR[b][s-1] ^ pr;
      end
      for (int j = 0; j < N; j++) t[j] = lt[j] ^ r[j];
      f[b] = '1;
      for (int j = 0; j < N; j++) f[b] = f[b] & lt[j];
      expR[b] = '0;
      expS[b] = '1;                     // the public term: party 1
      for (int j = 0; j < N; j++) expS[b] = expS[b] & t[j];
      for (int s = 1; s < 256; s++) begin
        logic [P-1:0] a, c;
        a = shR[b][s-1];
        c = shS[b][s-1];
        for (int j = 0; j < N; j++) if (!s[j]) begin a = a & t[j]; c = c & t[j]; end
        expR[b] ^= a;
        expS[b] ^= c;
      end
    end
    lt_valid = 0; rnd_valid = 0; tx_ready = 0; s_valid = 0; out_ready = 0;
    lt_data = '0; rnd_data = '0; s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        lt_data = ltR[b]; lt_valid = 1;
        do @(posedge clk); while (!lt_ready);
        #1 lt_valid = 0;
      end
      begin
        repeat (30) @(posedge clk);      // randomness arrives late at first
        for (int b = 0; b < B; b++)
          for (int k = 0; k < NR; k++) begin
            @(negedge clk);
            rnd_data = shR[b][k]; rnd_valid = 1;
            do @(posedge clk); while (!rnd_ready);
            #1 rnd_valid = 0;
          end
      end
      for (int b = 0; b < B; b++) begin
        do @(posedge clk); while (!tx_valid);
        t_tx[b] = cyc;
        for (int j = 0; j < N; j++)
          check(tx_data[j] == (ltR[b][j] ^ shR[b][(1 << j) - 1]), $sformatf("batch %0d masked chunk %0d", b, j));
        if (b > 0) check(t_tx[b] >= t_s[b-1] + 64, $sformatf("batch %0d masked before batch %0d released", b, b - 1));
        @(negedge clk);
        tx_ready = 1;
        @(negedge clk);
        tx_ready = 0;
        for (int j = 0; j < N; j++) s_data[j] = ltS[b][j] ^ shS[b][(1 << j) - 1];
        s_valid = 1;
        do @(posedge clk); while (!s_ready);
        t_s[b] = cyc;
        #1 s_valid = 0;
      end
      for (int o = 0; o < B / 8; o++) begin
        do begin
          @(negedge clk);
          out_ready = 1'($urandom % 2);
          @(posedge clk);
        end while (!(out_valid && out_ready));
        for (int k = 0; k < 8; k++) begin
          int b;
          b = o * 8 + k;
          check(out_data[k*64 +: 64] == expR[b], $sformatf("batch %0d share", b));
          check((out_data[k*64 +: 64] ^ expS[b]) == f[b], $sformatf("batch %0d reconstruction", b));
        end
        #1 out_ready = 0;
      end
    join
    // steady state: one batch per NR cycles, the rate of the randomness
    // stream (one share word per cycle); evaluation (65 cycles) hides under it
    for (int b = 4; b < B; b++)
      check(t_tx[b] - t_tx[b-1] <= NR + 4, $sformatf("batch period %0d", t_tx[b] - t_tx[b-1]));
    check(n_rand_wait > 0, "randomness wait never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
