// result_buffer: a core's intermediate ("middle") result memory.
//
// Each line holds COLS signed ACC_W partial sums, one per output column of a
// macro. The accumulate port adds a macro's result vector to a line
// (read-modify-write in one cycle); the clear port zeroes a line; the read
// port returns a line combinationally for the top-level vector unit. Clear
// and accumulate to the same line in one cycle are not allowed. The paper
// names this buffer ("Middle result") without detail; the accumulate-in-place
// behaviour and the sizes are this design's choices.
module result_buffer #(
  parameter int unsigned LINES = 512,
  parameter int unsigned COLS  = gpp_pkg::MACRO_COLS,
  parameter int unsigned ACC_W = gpp_pkg::ACC_W,
  localparam int unsigned AW   = $clog2(LINES)
) (
  input  logic                       clk,
  input  logic                       acc_en,
  input  logic [AW-1:0]              acc_line,
  input  logic [COLS-1:0][ACC_W-1:0] acc_data,
  input  logic                       clr_en,
  input  logic [AW-1:0]              clr_line,
  input  logic [AW-1:0]              rd_line,
  output logic [COLS-1:0][ACC_W-1:0] rd_data
);
  logic [COLS-1:0][ACC_W-1:0] mem [LINES];
  logic [COLS-1:0][ACC_W-1:0] sum;

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) sum[c] = mem[acc_line][c] + acc_data[c];
  end

  always_ff @(posedge clk) begin
    if (clr_en) mem[clr_line] <= '0;
    if (acc_en) mem[acc_line] <= sum;
  end

  assign rd_data = mem[rd_line];

  a_no_clr_acc_clash: assert property (@(posedge clk) !(clr_en && acc_en && clr_line == acc_line));
endmodule
