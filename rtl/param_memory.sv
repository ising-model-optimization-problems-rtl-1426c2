// param_memory: on-chip storage of the RBM weight matrix and both bias vectors.
//
// The weight matrix W (NV x NH, visible row i, hidden column j) and the visible and
// hidden bias vectors are held in registers so that every weight can be read in the
// same clock: the visible layer reads the rows of W and the hidden layer its columns.
// The paper keeps all weights and biases on chip and loads them from the host over
// PCIe; the single-word write port below stands for that path (this design's choice
// of interface). Writes take effect at the next clock edge. All entries reset to 0.
//
// Interface: wr_en with wr_sel (weight / visible bias / hidden bias), wr_row (visible
// index), wr_col (hidden index) and wr_data (9-bit signed, 2 fractional bits).
// An out-of-range address is ignored.
module param_memory
  import rbm_pkg::*;
#(
  parameter int unsigned NV = DEFAULT_N,
  parameter int unsigned NH = DEFAULT_N,
  localparam int unsigned ROW_W = (NV > 1) ? $clog2(NV) : 1,
  localparam int unsigned COL_W = (NH > 1) ? $clog2(NH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  param_sel_e        wr_sel,
  input  logic [ROW_W-1:0]  wr_row,
  input  logic [COL_W-1:0]  wr_col,
  input  weight_t           wr_data,
  output weight_t           weights  [NV][NH],
  output weight_t           vis_bias [NV],
  output weight_t           hid_bias [NH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NV; i++) begin
        vis_bias[i] <= '0;
        for (int j = 0; j < NH; j++) weights[i][j] <= '0;
      end
      for (int j = 0; j < NH; j++) hid_bias[j] <= '0;
    end else if (wr_en) begin
      unique case (wr_sel)
        SEL_WEIGHT:
          if (32'(wr_row) < NV && 32'(wr_col) < NH) weights[wr_row][wr_col] <= wr_data;
        SEL_VIS_BIAS:
          if (32'(wr_row) < NV) vis_bias[wr_row] <= wr_data;
        SEL_HID_BIAS:
          if (32'(wr_col) < NH) hid_bias[wr_col] <= wr_data;
        default: ;
      endcase
    end
  end

endmodule
