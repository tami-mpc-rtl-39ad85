// write_back: collects the tree-merge output shares into memory words.
//
// Each finished batch gives P output-share bits <lt>_R (one per packed
// comparison). AXI_W/P consecutive batches are placed into one AXI_W-bit
// word, batch b in bits [b*P +: P], and the word is handed to the memory
// side. The paper names the stage; the packing order is this design's.
//
// Interface: in_valid/in_ready per batch result, out_valid/out_ready per
// word; the word is offered once full and must be taken before refilling.
module write_back #(
  parameter int unsigned P     = 64,
  parameter int unsigned AXI_W = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [P-1:0]     in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [AXI_W-1:0] out_data
);

  localparam int unsigned NB = AXI_W / P;
  localparam int unsigned CW = $clog2(NB + 1);
  logic [CW-1:0] cnt_q;

  assign out_valid = (cnt_q == CW'(NB));
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q    <= '0;
      out_data <= '0;
    end else if (out_valid) begin
      if (out_ready) cnt_q <= '0;
    end else if (in_valid) begin
      out_data[int'(cnt_q)*P +: P] <= in_data;
      cnt_q <= cnt_q + CW'(1);
    end
  end

endmodule
