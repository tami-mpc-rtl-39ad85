// tm_prefetch: load and prefetch of the correlated randomness of the tree
// merge - this party's shares of the subset products r_S.
//
// Two banks of NR entries of P bits each (one entry per used subset, one
// bit per packed comparison). The randomness source streams the NR shares
// of a batch in address order (see polymult_pkg) into the bank being
// filled, while the other bank serves the batch being evaluated; when the
// evaluation releases its bank the roles swap. Because the addresses are
// fixed by the exponent matrix and not by data, the next batch's shares are
// always fetched ahead. The paper gives the purpose (prefetching the
// deterministically indexed randomness); the ping-pong banks are this
// design's choice.
//
// Interface: wr_valid/wr_ready, one P-bit share per handshake. rd_valid is
// high when the read bank is full; rd_shares shows all NR entries of it;
// rd_release (one cycle) frees it. rd_singles gives, for each variable j,
// the share of r_j (address SINGLE_ADDR[j]), zero for a variable no row uses.
module tm_prefetch
  import polymult_pkg::*;
#(
  parameter int unsigned M   = 1,
  parameter int unsigned N   = 8,
  parameter exp_mat_t    EXP = product_matrix(8),
  parameter int unsigned P   = 64,
  localparam int unsigned NR = num_rand(EXP, M, N),
  localparam int unsigned AW = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_valid,
  output logic                   wr_ready,
  input  logic [P-1:0]           wr_data,
  output logic                   rd_valid,
  output logic [NR-1:0][P-1:0]   rd_shares,
  output logic [N-1:0][P-1:0]    rd_singles,
  input  logic                   rd_release
);

  logic [1:0][NR-1:0][P-1:0] bank_q;
  logic [1:0]                full_q;
  logic                      wr_bank_q, rd_bank_q;
  logic [AW:0]               wptr_q;

  assign wr_ready  = !full_q[wr_bank_q];
  assign rd_valid  = full_q[rd_bank_q];
  assign rd_shares = bank_q[rd_bank_q];

  for (genvar j = 0; j < N; j++) begin : g_single
    localparam vmask_t S    = vmask_t'(1) << j;
    localparam bit     USED = is_used(EXP, M, N, S);
    localparam int     A    = USED ? rand_addr(EXP, M, N, S) : 0;
    assign rd_singles[j] = USED ? bank_q[rd_bank_q][A] : '0;
  end

  // share storage: written before it is read, so it needs no reset
  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) bank_q[wr_bank_q][wptr_q[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q    <= '0;
      wr_bank_q <= 1'b0;
      rd_bank_q <= 1'b0;
      wptr_q    <= '0;
    end else begin
      if (wr_valid && wr_ready) begin
        if (int'(wptr_q) == NR - 1) begin
          full_q[wr_bank_q] <= 1'b1;
          wr_bank_q         <= !wr_bank_q;
          wptr_q            <= '0;
        end else begin
          wptr_q <= wptr_q + 1'b1;
        end
      end
      if (rd_release && rd_valid) begin
        full_q[rd_bank_q] <= 1'b0;
        rd_bank_q         <= !rd_bank_q;
      end
    end
  end

endmodule
