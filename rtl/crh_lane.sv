// crh_lane: one key-expansion + AES-128 unit of the correlation-robust hash.
//
// It computes H(key, x) = AES_key(x) xor x. Key expansion is not run ahead of
// encryption and no key schedule is stored: each cycle the lane produces the
// next round key while the current AES round consumes the present one, so a
// block takes one key-expansion step (the load of round key 0) followed by 11
// AES rounds (the initial AddRoundKey and rounds 1..10), as in the
// interleaved schedule of the paper's hash pipeline. The final xor of the
// AES output with the hashed block (Matyas-Meyer-Oseas style) is this
// design's reading of the two-input gate drawn after the AES units; the
// paper does not print its type.
//
// Interface: start with key/blk loads a block when the lane is idle (busy
// low); that clock edge is the key-expansion step. The next 11 edges run
// the AES rounds. done is high in the cycle before the 11th of them, the
// edge that registers hash; hash then holds its value until the next start.
// The lane is idle again after that edge, so a new block can start every 12
// cycles.
module crh_lane
  import tami_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  blk_t key,
  input  blk_t blk,
  output logic busy,
  output logic done,
  output blk_t hash
);

  blk_t       state_q, rkey_q, blk_q;
  logic [3:0] rnd_q;      // AES round to perform next
  logic       busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      rnd_q   <= '0;
      state_q <= '0;
      rkey_q  <= '0;
      blk_q   <= '0;
      hash    <= '0;
    end else begin
      if (!busy_q) begin
        if (start) begin
          // key-expansion step 0: round key 0 is the key itself
          busy_q  <= 1'b1;
          rnd_q   <= 4'd0;
          rkey_q  <= key;
          state_q <= blk;
          blk_q   <= blk;
        end
      end else begin
        // AES round rnd_q with round key rnd_q, next round key in parallel
        if (rnd_q == 4'd0)
          state_q <= state_q ^ rkey_q;
        else if (rnd_q == 4'd10)
          state_q <= sub_shift(state_q) ^ rkey_q;
        else
          state_q <= mix_columns(sub_shift(state_q)) ^ rkey_q;
        if (rnd_q != 4'd10)
          rkey_q <= key_step(rkey_q, rcon_of(rnd_q + 4'd1));
        rnd_q <= rnd_q + 4'd1;
        if (rnd_q == 4'd10) begin
          busy_q <= 1'b0;
          hash   <= sub_shift(state_q) ^ rkey_q ^ blk_q;
        end
      end
    end
  end

  assign busy = busy_q;
  assign done = busy_q && (rnd_q == 4'd10);

endmodule
