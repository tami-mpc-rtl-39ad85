// tb_top_driver: plays everything around the receiver accelerator - the
// correlated-OT generator (hash requests), the TEE (chunks x, subset-product
// shares, the sender's released term) and the sender (oblivious messages,
// its output share) - and checks the receiver's results.
//
// For every batch of P comparisons it draws leaf bits lt_j (mostly ones, so
// that products of all of them are often one), chunk pairs (x_j, y_j) with
// 1{y_j < x_j} = lt_j, random sender shares and random r_j. It checks:
//   - every masked word sent to the sender equals <lt_j>_R xor <r_j>_R;
//   - every output share equals the share equation evaluated here;
//   - output share xor the sender's share equals the polynomial of the
//     true leaf bits;
//   - the steady-state rate of one output word per
//     (AXI_W/P batches) * (P/comparisons-per-message-word) * 96 cycles;
//   - that each named mechanism happened: the CRH mask wait, the randomness
//     wait, a batch masked while the next batch's shares were already
//     loaded into the other bank (prefetch), backpressure
//     on the sender and output links, the public term (party 1) and, when
//     the matrix has rows that share variables, reuse of a share.
module tb_top_driver
  import tami_pkg::*;
  import tb_aes_ref_pkg::*;
#(
  parameter int unsigned M = 1,
  parameter int unsigned N = 8,
  parameter logic [7:0][15:0] ACT = {112'h0, 16'h00ff},
  parameter int unsigned OUT_WORDS = 2
) (
  input  logic                clk,
  output logic                rst_n,
  output logic                party,
  output logic                req_valid,
  input  logic                req_ready,
  output crh_req_t            req,
  output logic                x_valid,
  input  logic                x_ready,
  output logic [127:0]        x_data,
  output logic                m_valid,
  input  logic                m_ready,
  output logic [511:0]        m_data,
  output logic                rnd_valid,
  input  logic                rnd_ready,
  output logic [512/N-1:0]    rnd_data,
  input  logic                tx_valid,
  output logic                tx_ready,
  input  logic [N-1:0][512/N-1:0] tx_data,
  output logic                s_valid,
  input  logic                s_ready,
  output logic [N-1:0][512/N-1:0] s_data,
  input  logic                out_valid,
  output logic                out_ready,
  input  logic [511:0]        out_data,
  input  logic                mask_wait,
  input  logic                rand_wait
);
  localparam int P   = 512 / N;
  localparam int L   = 32;                 // leaf OTs per message word
  localparam int CPW = L / N;              // comparisons per message word
  localparam int WPB = P / CPW;            // message words per batch
  localparam int BPO = 512 / P;            // batches per output word
  localparam int NB  = BPO * OUT_WORDS;    // batches in the run

  function automatic bit used(input int s);
    bit u;
    u = 0;
    if (s != 0) for (int i = 0; i < M; i++) if ((s & ~int'(ACT[i])) == 0) u = 1;
    return u;
  endfunction
  function automatic int count_used();
    int c;
    c = 0;
    for (int s = 1; s < (1 << N); s++) c += int'(used(s));
    return c;
  endfunction
  localparam int NR = count_used();

  // per-batch data
  logic [N-1:0][P-1:0] lt [NB], ltS [NB], rR [NB], rS [NB];
  logic [P-1:0] shR [NB][NR], shS [NB][NR];
  logic [P-1:0] expR [NB], fpoly [NB];
  logic [NB-1:0] party_of;

  int checks = 0, failures = 0, cyc = 0;
  int n_mask_wait = 0, n_rand_wait = 0, n_prefetch = 0, n_tx_bp = 0, n_out_bp = 0;
  int n_reuse = 0, n_public = 0, n_rnd = 0;
  int out_time [OUT_WORDS];
  always @(posedge clk) begin
    cyc++;
    if (mask_wait) n_mask_wait++;
    if (rand_wait) n_rand_wait++;
    if (rnd_valid && rnd_ready) n_rnd++;
    if (tx_valid && !tx_ready) n_tx_bp++;
    if (out_valid && !out_ready) n_out_bp++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // leaf OT q of message word w in batch b: comparison w*CPW + q/N, chunk q%N
  crh_req_t            rq  [NB][WPB][L];
  logic [127:0]        xw  [NB][WPB];
  logic [511:0]        mw  [NB][WPB];

  initial begin
    // ---- build the run ----
    for (int b = 0; b < NB; b++) begin
      party_of[b] = (b >= BPO);     // first output word party 0, then party 1
      for (int j = 0; j < N; j++)
        for (int c = 0; c < P; c++) begin
          lt[b][j][c]  = ($urandom % 16) != 0;
          ltS[b][j][c] = 1'($urandom);
          rR[b][j][c]  = 1'($urandom);
          rS[b][j][c]  = 1'($urandom);
        end
      // shares of the used subset products, in mask order
      begin
        int k;
        k = 0;
        for (int s = 1; s < (1 << N); s++)
          if (used(s)) begin
            logic [P-1:0] prod;
            prod = '1;
            for (int j = 0; j < N; j++) if (s[j]) prod = prod & (rR[b][j] ^ rS[b][j]);
            shR[b][k] = {$urandom, $urandom, $urandom, $urandom};
            // a singleton's shares are the r_j shares themselves
            for (int j = 0; j < N; j++) if (s == (1 << j)) shR[b][k] = rR[b][j];
            shS[b][k] = shR[b][k] ^ prod;
            k++;
          end
      end
      // messages
      for (int w = 0; w < WPB; w++)
        for (int q = 0; q < L; q++) begin
          int c, j;
          logic [3:0] x, y;
          logic u;
          c = w * CPW + q / N;
          j = q % N;
          rq[b][w][q].key = {$urandom, $urandom, $urandom, $urandom};
          rq[b][w][q].blk = {$urandom, $urandom, $urandom, $urandom};
          u = ref_crh(rq[b][w][q].key, rq[b][w][q].blk)[0];
          if (lt[b][j][c]) begin x = 4'(1 + $urandom % 15); y = 4'($urandom % x); end
          else begin y = 4'($urandom); x = 4'($urandom % (int'(y) + 1)); end
          xw[b][w][q*4 +: 4] = x;
          for (int i = 0; i < 16; i++) mw[b][w][q*16 + i] = 1'($urandom);
          mw[b][w][q*16 + int'(x)] = lt[b][j][c] ^ ltS[b][j][c] ^ u;
        end
      // expected receiver share and the true polynomial
      begin
        logic [N-1:0][P-1:0] t;
        logic [P-1:0] pr;
        int seen [int];
        for (int j = 0; j < N; j++) t[j] = lt[b][j] ^ rR[b][j] ^ rS[b][j];
        expR[b] = '0;
        fpoly[b] = '0;
        for (int i = 0; i < M; i++) begin
          pr = '1;
          for (int j = 0; j < N; j++) if (ACT[i][j]) pr = pr & lt[b][j];
          fpoly[b] ^= pr;
          for (int s = 0; s < (1 << N); s++)
            if ((s & ~int'(ACT[i])) == 0) begin
              int a;
              if (s == 0) begin
                pr = {P{party_of[b]}};
              end else begin
                a = 0;
                for (int q = 1; q < s; q++) a += int'(used(q));
                pr = shR[b][a];
                if (b == 0) begin
                  if (seen.exists(s)) n_reuse++;
                  seen[s] = 1;
                end
              end
              for (int j = 0; j < N; j++) if (ACT[i][j] && !s[j]) pr = pr & t[j];
              expR[b] ^= pr;
            end
        end
      end
    end
  end

  initial begin : run
    rst_n = 0; party = 0;
    req_valid = 0; x_valid = 0; m_valid = 0; rnd_valid = 0; s_valid = 0;
    tx_ready = 0; out_ready = 0;
    req = '0; x_data = '0; m_data = '0; rnd_data = '0; s_data = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    fork
      // hash requests
      for (int b = 0; b < NB; b++)
        for (int w = 0; w < WPB; w++)
          for (int q = 0; q < L; q++) begin
            @(negedge clk);
            req = rq[b][w][q]; req_valid = 1;
            do @(posedge clk); while (!req_ready);
            #1 req_valid = 0;
          end
      // chunks and messages, offered early so decryption waits on the CRH
      for (int b = 0; b < NB; b++)
        for (int w = 0; w < WPB; w++) begin
          @(negedge clk);
          x_data = xw[b][w]; m_data = mw[b][w]; x_valid = 1; m_valid = 1;
          do @(posedge clk); while (!x_ready);
          #1 x_valid = 0; m_valid = 0;
        end
      // randomness: held back at the start so the first batch waits for it
      begin
        repeat (WPB * 96 + 200) @(posedge clk);
        for (int b = 0; b < NB; b++)
          for (int k = 0; k < NR; k++) begin
            @(negedge clk);
            rnd_data = shR[b][k]; rnd_valid = 1;
            do @(posedge clk); while (!rnd_ready);
            #1 rnd_valid = 0;
          end
      end
      // sender link: masked words out, sender's released term in
      for (int b = 0; b < NB; b++) begin
        do begin
          @(negedge clk);
          tx_ready = ($urandom % 4 == 0);
          @(posedge clk);
        end while (!(tx_valid && tx_ready));
        for (int j = 0; j < N; j++)
          check(tx_data[j] == (lt[b][j] ^ ltS[b][j] ^ rR[b][j]), $sformatf("batch %0d masked word, chunk %0d", b, j));
        // the next batch's shares already sit in the other bank
        if (n_rnd >= NR * (b + 2)) n_prefetch++;
        #1 tx_ready = 0;
        @(negedge clk);
        for (int j = 0; j < N; j++) s_data[j] = ltS[b][j] ^ rS[b][j];
        s_valid = 1;
        do @(posedge clk); while (!s_ready);
        #1 s_valid = 0;
      end
      // output words
      for (int o = 0; o < OUT_WORDS; o++) begin
        do begin
          @(negedge clk);
          out_ready = ($urandom % 3 == 0);
          @(posedge clk);
        end while (!(out_valid && out_ready));
        out_time[o] = cyc;
        for (int bb = 0; bb < BPO; bb++) begin
          int b;
          logic [P-1:0] shareS;
          b = o * BPO + bb;
          check(out_data[bb*P +: P] == expR[b], $sformatf("batch %0d receiver share", b));
          // the sender's share, from its own shares and the public values
          begin
            logic [N-1:0][P-1:0] t;
            logic [P-1:0] pr;
            for (int j = 0; j < N; j++) t[j] = lt[b][j] ^ rR[b][j] ^ rS[b][j];
            shareS = '0;
            for (int i = 0; i < M; i++)
              for (int s = 0; s < (1 << N); s++)
                if ((s & ~int'(ACT[i])) == 0) begin
                  int a;
                  if (s == 0) pr = {P{!party_of[b]}};
                  else begin
                    a = 0;
                    for (int q = 1; q < s; q++) a += int'(used(q));
                    pr = shS[b][a];
                  end
                  for (int j = 0; j < N; j++) if (ACT[i][j] && !s[j]) pr = pr & t[j];
                  shareS ^= pr;
                end
          end
          check((out_data[bb*P +: P] ^ shareS) == fpoly[b], $sformatf("batch %0d reconstructed result", b));
          if (party_of[b] && fpoly[b] != 0) n_public++;
        end
        #1 out_ready = 0;
        if (o == 0) party = 1;    // the next output word is computed as party 1
      end
    join
    if (OUT_WORDS > 2) begin
      check(out_time[2] - out_time[1] <= BPO * WPB * 96 + 40,
            $sformatf("output word period %0d, leaf-bound period %0d", out_time[2] - out_time[1], BPO * WPB * 96));
    end
    check(out_time[OUT_WORDS-1] <= 200 + OUT_WORDS * BPO * WPB * 96 + 600, $sformatf("run took %0d cycles", out_time[OUT_WORDS-1]));
    check(n_mask_wait > 0, "CRH mask wait never happened");
    check(n_rand_wait > 0, "randomness wait never happened");
    check(n_prefetch > 0, "prefetch ahead never happened");
    check(n_tx_bp > 0, "sender backpressure never happened");
    check(n_out_bp > 0, "output backpressure never happened");
    check(n_public > 0, "public term never mattered");
    if (M > 1) check(n_reuse > 0, "no share was reused");
    $display("mechanisms: mask_wait=%0d rand_wait=%0d prefetch=%0d tx_backpressure=%0d out_backpressure=%0d public_term_batches=%0d reused_shares_per_batch=%0d",
             n_mask_wait, n_rand_wait, n_prefetch, n_tx_bp, n_out_bp, n_public, n_reuse);
    $display("cycles: %0d for %0d comparisons", cyc, NB * P);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
