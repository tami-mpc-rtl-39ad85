// leaf_compare: the receiver's leaf-comparison module.
//
// Hash requests (block and key, produced by the correlated-OT generator in
// the TEE) are regrouped by the layout adaptor into batches for the
// four-lane correlation-robust hash; the hashes become the one-bit masks u_c
// with which fcomp_decrypt opens the sender's oblivious messages. The
// result is one word of LEAVES leaf-comparison shares <lt_j>_R per message
// word. The chain follows the paper's block diagram; the streaming
// handshakes and word layouts are this design's (see the sub-modules).
//
// Throughput: LEAVES hashes are needed per message word. With LANES lanes
// and 12 cycles per CRH batch a word takes 12*LEAVES/LANES cycles (96 for
// 32 leaves): the leaf comparison is bound by the hash, as the paper notes.
module leaf_compare
  import tami_pkg::*;
#(
  parameter int unsigned LEAVES = LEAF_PER_W,
  parameter int unsigned K      = CHUNK_K,
  parameter int unsigned LANES  = CRH_LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req_valid,
  output logic                      req_ready,
  input  crh_req_t                  req,
  input  logic                      x_valid,
  output logic                      x_ready,
  input  logic [LEAVES*K-1:0]       x_data,
  input  logic                      m_valid,
  output logic                      m_ready,
  input  logic [LEAVES*(1<<K)-1:0]  m_data,
  output logic                      lt_valid,
  input  logic                      lt_ready,
  output logic [LEAVES-1:0]         lt_data,
  output logic                      mask_wait
);

  logic                 b_valid, b_ready, h_valid, h_ready;
  crh_req_t [LANES-1:0] batch;
  blk_t     [LANES-1:0] hash;

  layout_adaptor #(.LANES(LANES)) u_layout (
    .clk(clk), .rst_n(rst_n),
    .in_valid(req_valid), .in_ready(req_ready), .in_req(req),
    .out_valid(b_valid), .out_ready(b_ready), .out_batch(batch));

  crh_core #(.LANES(LANES)) u_crh (
    .clk(clk), .rst_n(rst_n),
    .in_valid(b_valid), .in_ready(b_ready), .in_req(batch),
    .out_valid(h_valid), .out_ready(h_ready), .out_hash(hash));

  fcomp_decrypt #(.LEAVES(LEAVES), .K(K), .LANES(LANES)) u_dec (
    .clk(clk), .rst_n(rst_n),
    .h_valid(h_valid), .h_ready(h_ready), .h_data(hash),
    .x_valid(x_valid), .x_ready(x_ready), .x_data(x_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data),
    .lt_valid(lt_valid), .lt_ready(lt_ready), .lt_data(lt_data),
    .mask_wait(mask_wait));

endmodule
