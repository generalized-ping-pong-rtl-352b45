// vpu: vector processing unit that reduces the intermediate results of the
// cores.
//
// Each core accumulates partial sums only for the weight tiles it ran, so a
// result line of the GeMM is the element-wise sum of that line over all NC
// cores. The unit adds NC vectors of COLS signed ACC_W words in one cycle and
// registers the sum together with a tag (the destination line): out_valid
// follows in_valid by one cycle. The paper states that intermediate results
// are accumulated by a VPU; the single-stage adder tree is this design's
// choice.
module vpu #(
  parameter int unsigned NC    = gpp_pkg::N_CORES_D,
  parameter int unsigned COLS  = gpp_pkg::MACRO_COLS,
  parameter int unsigned ACC_W = gpp_pkg::ACC_W,
  parameter int unsigned TAG_W = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic [TAG_W-1:0]                    in_tag,
  input  logic [NC-1:0][COLS-1:0][ACC_W-1:0]  in_data,
  output logic                                out_valid,
  output logic [TAG_W-1:0]                    out_tag,
  output logic [COLS-1:0][ACC_W-1:0]          out_data
);
  logic [COLS-1:0][ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int c = 0; c < int'(NC); c++)
      for (int j = 0; j < int'(COLS); j++) sum[j] = sum[j] + in_data[c][j];
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
        out_data <= sum;
      end
    end
  end
endmodule
