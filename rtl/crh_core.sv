// crh_core: the correlation-robust hash (CRH) with pipeline-aware
// interleaving.
//
// LANES key-expansion/AES lanes (four in the paper) run in lockstep on
// LANES independent blocks, each lane deriving its round keys on the fly
// from its own key while it encrypts (see crh_lane). A batch of LANES
// requests is taken in one handshake and LANES hashes are returned in one
// handshake; no round keys are written to memory.
//
// Timing: in_ready is high while the lanes are idle and the output register
// is empty or being emptied in the same cycle. A batch accepted at clock edge t (the key-expansion step) runs
// its 11 AES rounds at edges t+1..t+11 and out_valid is high from edge t+11,
// so the result can be taken at edge t+12: 12 cycles per batch, 1
// key-expansion step + 11 AES rounds, and a new batch can be taken in the
// cycle the previous result is. out_valid/out_data hold until
// out_ready. The batch handshake and the lockstep lanes are this design's
// choices; the lane count and the interleaved schedule follow the paper.
module crh_core
  import tami_pkg::*;
#(
  parameter int unsigned LANES = CRH_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  crh_req_t [LANES-1:0] in_req,
  output logic                 out_valid,
  input  logic                 out_ready,
  output blk_t     [LANES-1:0] out_hash
);

  logic [LANES-1:0] busy, done;
  blk_t [LANES-1:0] hash;
  logic             out_full_q;
  logic             start;

  assign in_ready = !(|busy) && (!out_full_q || out_ready);
  assign start    = in_valid && in_ready;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    crh_lane u_lane (
      .clk  (clk),
      .rst_n(rst_n),
      .start(start),
      .key  (in_req[l].key),
      .blk  (in_req[l].blk),
      .busy (busy[l]),
      .done (done[l]),
      .hash (hash[l])
    );
  end

  // The lanes start together, so they finish together.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_full_q <= 1'b0;
    else if (done[0])                out_full_q <= 1'b1;
    else if (out_valid && out_ready) out_full_q <= 1'b0;
  end

  assign out_valid = out_full_q;
  assign out_hash  = hash;

  lanes_in_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (done == '0) || (done == '1));

endmodule
