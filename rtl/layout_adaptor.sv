// layout_adaptor: regroups the stream of independent hash requests (one
// block and its key per cycle, as they arrive from the correlated-OT side)
// into batches of LANES requests, one per key-expansion/AES lane of the
// CRH. This is the data-layout transformation that lets the lanes expand
// the round keys of several independent blocks side by side instead of one
// block after another. The paper names the adaptor and the transformation;
// the one-request-per-cycle input and the fill-then-drain register are this
// design's choices.
//
// Interface: in_valid/in_ready, one request per handshake; request number q
// of a batch goes to lane q. out_valid/out_ready hand over a full batch.
// The register fills while out_valid is low, so a batch takes LANES input
// cycles plus one output handshake.
module layout_adaptor
  import tami_pkg::*;
#(
  parameter int unsigned LANES = CRH_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  crh_req_t             in_req,
  output logic                 out_valid,
  input  logic                 out_ready,
  output crh_req_t [LANES-1:0] out_batch
);

  localparam int unsigned CW = $clog2(LANES + 1);
  logic [CW-1:0] fill_q;

  assign out_valid = (fill_q == CW'(LANES));
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_q    <= '0;
      out_batch <= '0;
    end else if (out_valid) begin
      if (out_ready) fill_q <= '0;
    end else if (in_valid) begin
      out_batch[fill_q] <= in_req;
      fill_q            <= fill_q + CW'(1);
    end
  end

endmodule
