// sfu: special function unit applied to finished GeMM result lines.
//
// A line (COLS signed SUM_W sums of output columns nt*COLS ..) gets the bias
// of its column tile added when bias_en is set, then an activation:
// ACT_NONE, ACT_RELU (max(x,0)) or ACT_SIGMOID. The sigmoid is the
// piecewise-linear "hard sigmoid" clamp(x/4 + 0.5, 0, 1) on fixed-point
// numbers with FRAC fractional bits. The bias table holds BIAS_LINES lines
// of COLS words, written through bias_we. One line per cycle, one cycle of
// latency, tag passed along.
//
// The paper's SFU lists bias, ReLU/Sigmoid and splicing without detail. The
// fixed-point format and the sigmoid approximation are this design's
// choices; splicing, the joining of column tiles into whole output rows, is
// done by address: each line is written to the result memory at the row and
// column tile it belongs to.
module sfu
  import gpp_pkg::*;
#(
  parameter int unsigned COLS       = gpp_pkg::MACRO_COLS,
  parameter int unsigned SUM_W      = gpp_pkg::ACC_W,
  parameter int unsigned TAG_W      = 16,
  parameter int unsigned BIAS_LINES = 64,
  parameter int unsigned FRAC       = 8,
  localparam int unsigned BW        = $clog2(BIAS_LINES)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        bias_we,
  input  logic [BW-1:0]               bias_waddr,
  input  logic [COLS-1:0][SUM_W-1:0]  bias_wdata,
  input  logic                        in_valid,
  input  logic [TAG_W-1:0]            in_tag,
  input  logic [BW-1:0]               in_ntile,
  input  logic                        bias_en,
  input  act_e                        act,
  input  logic [COLS-1:0][SUM_W-1:0]  in_data,
  output logic                        out_valid,
  output logic [TAG_W-1:0]            out_tag,
  output logic [COLS-1:0][SUM_W-1:0]  out_data
);
  logic [COLS-1:0][SUM_W-1:0] bias_mem [BIAS_LINES];
  logic [COLS-1:0][SUM_W-1:0] y;

  always_ff @(posedge clk) if (bias_we) bias_mem[bias_waddr] <= bias_wdata;

  always_comb begin
    logic signed [SUM_W-1:0] v, h;
    for (int j = 0; j < int'(COLS); j++) begin
      v = $signed(in_data[j]) + (bias_en ? $signed(bias_mem[in_ntile][j]) : SUM_W'(0));
      unique case (act)
        ACT_RELU:    y[j] = (v < 0) ? '0 : v;
        ACT_SIGMOID: begin
          h = (v >>> 2) + SUM_W'(1 << (FRAC - 1));
          if (h < 0)                         y[j] = '0;
          else if (h > SUM_W'(1 << FRAC))    y[j] = SUM_W'(1 << FRAC);
          else                               y[j] = h;
        end
        default:     y[j] = v;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag  <= in_tag;
        out_data <= y;
      end
    end
  end
endmodule
