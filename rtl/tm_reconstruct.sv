// tm_reconstruct: rebuilds the public masked values lt_j xor r_j of the
// tree merge.
//
// lt_j xor r_j = (<lt_j>_R xor <r_j>_R) xor (<lt_j>_S xor <r_j>_S). The
// first term is this party's mask word; the second is the sender's term.
// With the paper's interleaving optimisation the sender's leaf share is
// derived from the synchronized seed, so its term is released by this
// party's own TEE instead of being sent over the network; here it is simply
// an input stream. Bit layout as in the packed words: [j][c].
//
// Interface: mk_* (own mask word) and s_* (sender term) are valid/ready
// inputs, joined; t_* is the registered output. One word per cycle when
// both inputs are there and the output is free or being taken.
module tm_reconstruct #(
  parameter int unsigned N = 8,
  parameter int unsigned P = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mk_valid,
  output logic                mk_ready,
  input  logic [N-1:0][P-1:0] mk_data,
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [N-1:0][P-1:0] s_data,
  output logic                t_valid,
  input  logic                t_ready,
  output logic [N-1:0][P-1:0] t_data
);

  logic full_q, fire;

  assign fire     = mk_valid && s_valid && (!full_q || t_ready);
  assign mk_ready = fire;
  assign s_ready  = fire;
  assign t_valid  = full_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      t_data <= '0;
    end else if (fire) begin
      full_q <= 1'b1;
      t_data <= mk_data ^ s_data;
    end else if (t_valid && t_ready) begin
      full_q <= 1'b0;
    end
  end

endmodule
