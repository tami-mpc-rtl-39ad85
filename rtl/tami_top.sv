// tami_top: receiver-side accelerator for the TAMI-MPC secure comparison
// (Millionaires' protocol) - leaf comparison, data type adapter and
// one-round tree merge in one streaming pipeline.
//
// Streams (all valid/ready):
//   req   - hash requests (key, block) from the correlated-OT generator in
//           the TEE, one per leaf OT, in leaf order;
//   x     - the receiver's chunks x_j (k bits each), one word per message
//           word;
//   m     - the sender's oblivious messages, 2^k bits per leaf OT;
//   rnd   - this party's shares of the subset products r_S from the TEE,
//           NR words of P bits per batch of P comparisons;
//   tx    - the masked leaf shares sent to the sender (the tree merge's one
//           online message);
//   s     - the sender's term <lt_j>_S xor <r_j>_S released by the TEE;
//   out   - output shares <lt>_R, AXI_W/P batches per word.
// party selects which side adds the public term of the polynomial (the
// paper's p: 0 client, 1 server). mask_wait and rand_wait flag the two
// stalls: decryption waiting for CRH masks, tree merge waiting for
// randomness. The structure follows the paper's system diagram; the
// correlated-OT generator and the TEE are outside this design.
module tami_top
  import tami_pkg::*;
  import polymult_pkg::*;
#(
  parameter int unsigned M     = 1,
  parameter int unsigned N     = N_CHUNKS,
  parameter int unsigned K     = CHUNK_K,
  parameter exp_mat_t    EXP   = product_matrix(N_CHUNKS),
  parameter int unsigned LANES = CRH_LANES,
  parameter int unsigned LC    = 4,
  parameter int unsigned BUS_W = AXI_W,
  localparam int unsigned LEAVES = BUS_W / (1 << K),
  localparam int unsigned P      = BUS_W / N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     party,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  crh_req_t                 req,
  input  logic                     x_valid,
  output logic                     x_ready,
  input  logic [LEAVES*K-1:0]      x_data,
  input  logic                     m_valid,
  output logic                     m_ready,
  input  logic [BUS_W-1:0]         m_data,
  input  logic                     rnd_valid,
  output logic                     rnd_ready,
  input  logic [P-1:0]             rnd_data,
  output logic                     tx_valid,
  input  logic                     tx_ready,
  output logic [N-1:0][P-1:0]      tx_data,
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic [N-1:0][P-1:0]      s_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [BUS_W-1:0]         out_data,
  output logic                     mask_wait,
  output logic                     rand_wait
);

  logic                lt_valid, lt_ready, pk_valid, pk_ready;
  logic [LEAVES-1:0]   lt_data;
  logic [N-1:0][P-1:0] pk_data;

  leaf_compare #(.LEAVES(LEAVES), .K(K), .LANES(LANES)) u_leaf (
    .clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req(req),
    .x_valid(x_valid), .x_ready(x_ready), .x_data(x_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data),
    .lt_valid(lt_valid), .lt_ready(lt_ready), .lt_data(lt_data),
    .mask_wait(mask_wait));

  data_type_adapter #(.IN_W(LEAVES), .N(N), .P(P)) u_adapt (
    .clk(clk), .rst_n(rst_n),
    .in_valid(lt_valid), .in_ready(lt_ready), .in_data(lt_data),
    .out_valid(pk_valid), .out_ready(pk_ready), .out_data(pk_data));

  tree_merge #(.M(M), .N(N), .EXP(EXP), .LC(LC), .P(P), .AXI_W(BUS_W)) u_merge (
    .clk(clk), .rst_n(rst_n), .party(party),
    .lt_valid(pk_valid), .lt_ready(pk_ready), .lt_data(pk_data),
    .rnd_valid(rnd_valid), .rnd_ready(rnd_ready), .rnd_data(rnd_data),
    .tx_valid(tx_valid), .tx_ready(tx_ready), .tx_data(tx_data),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .rand_wait(rand_wait));

endmodule
