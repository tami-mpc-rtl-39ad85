// polymult_eval: packed polynomial evaluation of F_PolyMult with XOR
// reduction - the local computation that finishes the one-round tree merge.
//
// Each bit position of a P-bit vector belongs to a different comparison
// (packed execution): t[j] holds lt_j xor r_j of P comparisons and shares[a]
// holds this party's share of one subset product r_S for the same P
// comparisons. LC local-computation units each take one term per cycle from
// polymult_lut and form  <r_S> AND prod_{j in A_i \ S} t_j  (the public term
// prod_{j in A_i} t_j for party 1 only) bit-wise over all P comparisons; an
// XOR tree folds the LC terms into the running share. After ceil(T/LC)
// cycles the P output shares are complete.
//
// This follows the paper's share equation; which party adds the public term
// follows the factor p of that equation (p = 1, the server). The number of
// units LC is not given by the paper and is this design's choice.
//
// Interface: in_valid/in_ready take t for a new batch; shares must stay
// unchanged until release pulses, which it does in the cycle the result is
// registered. out_valid/out_ready return the P result bits. Latency from
// acceptance to out_valid: ceil(T/LC) cycles plus one.
module polymult_eval
  import polymult_pkg::*;
#(
  parameter int unsigned M   = 1,
  parameter int unsigned N   = 8,
  parameter exp_mat_t    EXP = product_matrix(8),
  parameter int unsigned LC  = 4,
  parameter int unsigned P   = 64,
  localparam int unsigned T  = num_terms(EXP, M, N),
  localparam int unsigned NR = num_rand(EXP, M, N),
  localparam int unsigned TW = $clog2(T + LC + 1),
  localparam int unsigned AW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  party,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N-1:0][P-1:0]   t,
  input  logic [NR-1:0][P-1:0]  shares,
  output logic                  release_bank,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [P-1:0]          out_res
);

  logic [TW-1:0]         base_q;
  logic                  busy_q, out_full_q;
  logic [N-1:0][P-1:0]   t_q;
  logic [P-1:0]          acc_q, step_xor;
  logic [LC-1:0]         l_valid, l_pub;
  logic [LC-1:0][N-1:0]  l_smask, l_tmask;
  logic [LC-1:0][AW-1:0] l_addr;
  logic                  last;

  polymult_lut #(.M(M), .N(N), .EXP(EXP), .LC(LC)) u_lut (
    .base (base_q),
    .valid(l_valid),
    .pub  (l_pub),
    .smask(l_smask),
    .tmask(l_tmask),
    .addr (l_addr)
  );

  // LC local-computation units and the XOR reduction
  always_comb begin
    step_xor = '0;
    for (int l = 0; l < LC; l++) begin
      logic [P-1:0] term;
      term = l_pub[l] ? {P{party}} : shares[l_addr[l]];
      for (int j = 0; j < N; j++)
        if (l_tmask[l][j]) term = term & t_q[j];
      if (l_valid[l]) step_xor = step_xor ^ term;
    end
  end

  assign last         = busy_q && (int'(base_q) + LC >= T);
  assign in_ready     = !busy_q && !out_full_q;
  assign release_bank = last;
  assign out_valid    = out_full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      out_full_q <= 1'b0;
      base_q     <= '0;
      acc_q      <= '0;
      t_q        <= '0;
      out_res    <= '0;
    end else begin
      if (in_valid && in_ready) begin
        busy_q <= 1'b1;
        base_q <= '0;
        acc_q  <= '0;
        t_q    <= t;
      end else if (busy_q) begin
        acc_q  <= acc_q ^ step_xor;
        base_q <= base_q + TW'(LC);
        if (last) begin
          busy_q     <= 1'b0;
          out_full_q <= 1'b1;
          out_res    <= acc_q ^ step_xor;
        end
      end
      if (out_valid && out_ready) out_full_q <= 1'b0;
    end
  end

endmodule
