// data_type_adapter: packs the leaf-comparison shares of many comparisons
// into one 512-bit word for packed polynomial execution.
//
// A leaf-comparison output word holds the n chunk shares of IN_W/n
// comparisons side by side (comparison c, chunk j at bit c*n + j). The tree
// merge evaluates P = 512/n comparisons at once with bit-wise logic, so it
// wants the same chunk of all P comparisons in one contiguous P-bit lane.
// The adapter collects P*n/IN_W input words and writes them transposed:
// out[j][c] = chunk j of comparison c of the batch. The paper gives the
// purpose (several comparisons per memory word, up to 512/n); the
// chunk-major transposed layout is this design's choice.
//
// Interface: in_valid/in_ready per input word, out_valid/out_ready per
// packed word. The packed word is offered after the last input word of a
// batch and must be taken before the next batch starts filling.
module data_type_adapter
  import tami_pkg::*;
#(
  parameter int unsigned IN_W = LEAF_PER_W,
  parameter int unsigned N    = N_CHUNKS,
  parameter int unsigned P    = PACK_P
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IN_W-1:0]     in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N-1:0][P-1:0] out_data
);

  localparam int unsigned CPW = IN_W / N;        // comparisons per input word
  localparam int unsigned WPB = P / CPW;         // input words per packed word
  localparam int unsigned CW  = $clog2(WPB + 1);

  logic [CW-1:0] cnt_q;

  assign out_valid = (cnt_q == CW'(WPB));
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q    <= '0;
      out_data <= '0;
    end else if (out_valid) begin
      if (out_ready) cnt_q <= '0;
    end else if (in_valid) begin
      for (int c = 0; c < CPW; c++)
        for (int j = 0; j < N; j++)
          out_data[j][int'(cnt_q)*CPW + c] <= in_data[c*N + j];
      cnt_q <= cnt_q + CW'(1);
    end
  end

  if (IN_W % N != 0 || P % (IN_W / N) != 0) begin : g_bad_size
    $error("IN_W must hold whole comparisons and P a whole number of input words");
  end

endmodule
