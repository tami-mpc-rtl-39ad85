// fcomp_decrypt: the receiver's decryption step of the TEE-assisted leaf
// comparison F_Comp.
//
// For every leaf OT (one k-bit chunk of one comparison) the sender sends
// 2^k one-bit messages m_i = 1{y_j < i} xor <lt_j>_S xor u_(tmp xor i).
// The receiver keeps only the message indexed by its own chunk x_j and
// removes the hash mask: <lt_j>_R = m_(x_j) xor u_c. The masks u_c come from
// the CRH, LANES per batch; the low bit of each 128-bit hash is the one-bit
// mask (truncating the hash to the message width is this design's choice).
//
// Word layout (this design's choice): a message word carries LEAVES leaf
// OTs, leaf q in bits [q*2^k +: 2^k], message i at bit q*2^k + i. The x word
// carries x for leaf q in bits [q*k +: k]. Leaf q of a word uses the hash of
// the q-th request of that word's group of LEAVES requests. The output word
// carries <lt>_R of leaf q at bit q.
//
// Timing: hash batches are taken until LEAVES masks are held; then, once x,
// message and a free output register are there, the word is decrypted in
// one cycle. mask_wait is high while a message word waits for masks - the
// CRH-bound stall the paper names as the leaf comparison's bottleneck.
module fcomp_decrypt
  import tami_pkg::*;
#(
  parameter int unsigned LEAVES = LEAF_PER_W,
  parameter int unsigned K      = CHUNK_K,
  parameter int unsigned LANES  = CRH_LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      h_valid,
  output logic                      h_ready,
  input  blk_t [LANES-1:0]          h_data,
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

  localparam int unsigned NB = LEAVES / LANES;     // hash batches per word
  localparam int unsigned CW = $clog2(NB + 1);

  logic [LEAVES-1:0] mask_q;
  logic [CW-1:0]     nb_q;
  logic              masks_full, out_full_q, fire;
  logic [LEAVES-1:0] lt_next;

  assign masks_full = (nb_q == CW'(NB));
  assign h_ready    = !masks_full;
  assign fire       = masks_full && x_valid && m_valid && (!out_full_q || lt_ready);
  assign x_ready    = fire;
  assign m_ready    = fire;
  assign lt_valid   = out_full_q;
  assign mask_wait  = m_valid && !masks_full;

  always_comb begin
    for (int q = 0; q < LEAVES; q++)
      lt_next[q] = m_data[q*(1<<K) + int'(x_data[q*K +: K])] ^ mask_q[q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q     <= '0;
      nb_q       <= '0;
      out_full_q <= 1'b0;
      lt_data    <= '0;
    end else begin
      if (h_valid && h_ready) begin
        for (int l = 0; l < LANES; l++)
          mask_q[int'(nb_q)*LANES + l] <= h_data[l][0];
        nb_q <= nb_q + CW'(1);
      end
      if (fire) begin
        lt_data    <= lt_next;
        out_full_q <= 1'b1;
        nb_q       <= '0;
      end else if (lt_valid && lt_ready) begin
        out_full_q <= 1'b0;
      end
    end
  end

  // LEAVES must be a whole number of hash batches
  if (LEAVES % LANES != 0) begin : g_bad_size
    $error("LEAVES must be a multiple of LANES");
  end

endmodule
