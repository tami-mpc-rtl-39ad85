// tree_merge: the receiver's one-round tree merge F_PolyMult.
//
// Per batch of P packed comparisons:
//   1. tm_prefetch has the batch's shares <r_S> ready in a bank (filled
//      ahead of time from the randomness stream);
//   2. tm_mask forms <lt_j> xor <r_j> and sends it to the sender (the one
//      online message);
//   3. tm_reconstruct xors in the sender's term to get t_j = lt_j xor r_j;
//   4. polymult_eval runs the LUT-driven packed evaluation and XOR
//      reduction, then releases the bank;
//   5. write_back packs the P output shares into memory words.
// A batch is masked only with the bank that will also evaluate it: the
// next batch is not masked until the current one has released its bank.
// Stage structure after the paper's block diagram; handshakes, banks and
// the one-batch-in-flight rule are this design's.
//
// rand_wait is high while a packed word waits because its randomness has
// not arrived yet.
module tree_merge
  import polymult_pkg::*;
#(
  parameter int unsigned M     = 1,
  parameter int unsigned N     = 8,
  parameter exp_mat_t    EXP   = product_matrix(8),
  parameter int unsigned LC    = 4,
  parameter int unsigned P     = 64,
  parameter int unsigned AXI_W = 512,
  localparam int unsigned NR   = num_rand(EXP, M, N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                party,
  input  logic                lt_valid,
  output logic                lt_ready,
  input  logic [N-1:0][P-1:0] lt_data,
  input  logic                rnd_valid,
  output logic                rnd_ready,
  input  logic [P-1:0]        rnd_data,
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [N-1:0][P-1:0] tx_data,
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [N-1:0][P-1:0] s_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [AXI_W-1:0]    out_data,
  output logic                rand_wait
);

  logic                rd_valid, rd_release, inflight_q;
  logic [NR-1:0][P-1:0] rd_shares;
  logic [N-1:0][P-1:0] rd_singles, mk_data, t_data;
  logic                mk_valid, mk_ready, t_valid, t_ready;
  logic                res_valid, res_ready;
  logic [P-1:0]        res_data;

  tm_prefetch #(.M(M), .N(N), .EXP(EXP), .P(P)) u_prefetch (
    .clk(clk), .rst_n(rst_n),
    .wr_valid(rnd_valid), .wr_ready(rnd_ready), .wr_data(rnd_data),
    .rd_valid(rd_valid), .rd_shares(rd_shares), .rd_singles(rd_singles),
    .rd_release(rd_release));

  tm_mask #(.N(N), .P(P)) u_mask (
    .clk(clk), .rst_n(rst_n),
    .lt_valid(lt_valid), .lt_ready(lt_ready), .lt_data(lt_data),
    .r_valid(rd_valid && !inflight_q), .r_single(rd_singles),
    .tx_valid(tx_valid), .tx_ready(tx_ready), .tx_data(tx_data),
    .mk_valid(mk_valid), .mk_ready(mk_ready), .mk_data(mk_data));

  tm_reconstruct #(.N(N), .P(P)) u_recon (
    .clk(clk), .rst_n(rst_n),
    .mk_valid(mk_valid), .mk_ready(mk_ready), .mk_data(mk_data),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .t_valid(t_valid), .t_ready(t_ready), .t_data(t_data));

  polymult_eval #(.M(M), .N(N), .EXP(EXP), .LC(LC), .P(P)) u_eval (
    .clk(clk), .rst_n(rst_n), .party(party),
    .in_valid(t_valid), .in_ready(t_ready), .t(t_data), .shares(rd_shares),
    .release_bank(rd_release),
    .out_valid(res_valid), .out_ready(res_ready), .out_res(res_data));

  write_back #(.P(P), .AXI_W(AXI_W)) u_wb (
    .clk(clk), .rst_n(rst_n),
    .in_valid(res_valid), .in_ready(res_ready), .in_data(res_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  // one batch between masking and bank release
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    inflight_q <= 1'b0;
    else if (lt_valid && lt_ready) inflight_q <= 1'b1;
    else if (rd_release)           inflight_q <= 1'b0;
  end

  assign rand_wait = lt_valid && !rd_valid && !inflight_q;

  release_only_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    rd_release |-> (inflight_q && rd_valid));

endmodule
