// tm_mask: the masking step of the one-round tree merge.
//
// For every packed comparison and chunk j it forms <lt_j>_R xor <r_j>_R,
// the only value this party sends in the online tree merge. The same word
// goes two ways: to the sender (tx) and on to the reconstruction (mk). It
// follows the paper's exchange; the two-output buffer is this design's.
//
// Interface: lt_valid/lt_ready takes a packed word of leaf shares; it is
// only taken while r_valid says the singleton shares r_single belong to the
// batch about to be masked. tx_* and mk_* are independent valid/ready
// outputs; the buffer frees once both have been taken.
module tm_mask #(
  parameter int unsigned N = 8,
  parameter int unsigned P = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                lt_valid,
  output logic                lt_ready,
  input  logic [N-1:0][P-1:0] lt_data,
  input  logic                r_valid,
  input  logic [N-1:0][P-1:0] r_single,
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [N-1:0][P-1:0] tx_data,
  output logic                mk_valid,
  input  logic                mk_ready,
  output logic [N-1:0][P-1:0] mk_data
);

  logic [N-1:0][P-1:0] mask_q;
  logic                tx_pend_q, mk_pend_q;

  assign lt_ready = r_valid && !tx_pend_q && !mk_pend_q;
  assign tx_valid = tx_pend_q;
  assign mk_valid = mk_pend_q;
  assign tx_data  = mask_q;
  assign mk_data  = mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q    <= '0;
      tx_pend_q <= 1'b0;
      mk_pend_q <= 1'b0;
    end else begin
      if (lt_valid && lt_ready) begin
        mask_q    <= lt_data ^ r_single;
        tx_pend_q <= 1'b1;
        mk_pend_q <= 1'b1;
      end else begin
        if (tx_valid && tx_ready) tx_pend_q <= 1'b0;
        if (mk_valid && mk_ready) mk_pend_q <= 1'b0;
      end
    end
  end

endmodule
