// pim_macro: one SRAM processing-in-memory macro of ROWS x COLS int8 weights.
//
// Two modes, as in any SRAM PIM macro:
//  * memory mode: wr_en writes WS weight bytes per cycle at beat address
//    wr_addr (row-major, beat a holds bytes a*WS .. a*WS+WS-1). A full tile
//    rewrite takes ROWS*COLS/WS cycles (time_rewrite = size_macro / s).
//  * compute mode: cmp_start latches an int8 input vector and a tag; the macro
//    then walks the array one operation unit (OU_ROWS x OU_COLS) per cycle,
//    so one vector takes ROWS*COLS/(OU_ROWS*OU_COLS) cycles
//    (time_PIM per vector = size_macro / size_OU). Results leave through a
//    valid/ready output register holding COLS signed ACC_W sums and the tag.
//
// Timing: cmp_ready is high when the macro can take a vector, also in the
// last compute cycle when the output register is free or being emptied, so
// back-to-back vectors stream at exactly one vector per STEPS cycles.
// The geometry, OU size and write speed follow the paper; the int8 signed
// operands, the 32-bit sums, the OU walk order (column groups inside row
// groups) and the handshake are this design's choices. The paper's macro is
// a custom SRAM array; here it is modelled as synthesizable flip-flop logic.
// rst_n is an asynchronous reset for every flop; it also disables the two
// assertions at the end (disable iff), which verilator reports as a
// synchronous use (SYNCASYNCNET) in this module and the ones above it.
module pim_macro #(
  parameter int unsigned ROWS    = gpp_pkg::MACRO_ROWS,
  parameter int unsigned COLS    = gpp_pkg::MACRO_COLS,
  parameter int unsigned OU_ROWS = gpp_pkg::OU_ROWS,
  parameter int unsigned OU_COLS = gpp_pkg::OU_COLS,
  parameter int unsigned WS      = gpp_pkg::WRITE_SPEED,
  parameter int unsigned ACC_W   = gpp_pkg::ACC_W,
  parameter int unsigned TAG_W   = 12,
  localparam int unsigned BEATS  = ROWS * COLS / WS,
  localparam int unsigned STEPS  = (ROWS / OU_ROWS) * (COLS / OU_COLS),
  localparam int unsigned BA_W   = $clog2(BEATS),
  localparam int unsigned ST_W   = $clog2(STEPS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // memory mode
  input  logic                          wr_en,
  input  logic [BA_W-1:0]               wr_addr,
  input  logic [WS-1:0][7:0]            wr_data,
  // compute mode
  input  logic                          cmp_start,
  input  logic [ROWS-1:0][7:0]          cmp_in,
  input  logic [TAG_W-1:0]              cmp_tag,
  output logic                          cmp_ready,
  output logic                          busy,
  output logic                          res_valid,
  input  logic                          res_ready,
  output logic [COLS-1:0][ACC_W-1:0]    res_data,
  output logic [TAG_W-1:0]              res_tag
);
  localparam int unsigned CG = COLS / OU_COLS;   // column groups per row group

  logic [7:0]             w [ROWS][COLS];
  logic [ROWS-1:0][7:0]   x_q;
  logic [TAG_W-1:0]       tag_q;
  logic [COLS-1:0][ACC_W-1:0] acc_q;
  logic                   running_q;
  logic [ST_W-1:0]        step_q;
  logic                   last_step;
  logic [COLS-1:0][ACC_W-1:0] acc_next;

  assign last_step = running_q && (step_q == ST_W'(STEPS - 1));
  assign cmp_ready = (!running_q || last_step) && (!res_valid || res_ready);
  assign busy      = running_q || res_valid;

  // Weight write port (memory mode)
  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < int'(WS); b++) begin
        w[(int'(wr_addr) * WS + b) / COLS][(int'(wr_addr) * WS + b) % COLS] <= wr_data[b];
      end
    end
  end

  // One operation unit per cycle
  always_comb begin
    int rg, cg, col;
    logic signed [ACC_W-1:0] sum;
    acc_next = acc_q;
    rg = int'(step_q) / CG;
    cg = int'(step_q) % CG;
    for (int j = 0; j < int'(OU_COLS); j++) begin
      col = cg * OU_COLS + j;
      sum = $signed(acc_q[col]);
      for (int i = 0; i < int'(OU_ROWS); i++) begin
        sum = sum + ACC_W'($signed(x_q[rg * OU_ROWS + i]) * $signed(w[rg * OU_ROWS + i][col]));
      end
      acc_next[col] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= 1'b0;
      step_q    <= '0;
      res_valid <= 1'b0;
      acc_q     <= '0;
      x_q       <= '0;
      tag_q     <= '0;
      res_data  <= '0;
      res_tag   <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (running_q) begin
        acc_q  <= acc_next;
        step_q <= step_q + 1'b1;
        if (last_step) begin
          res_data  <= acc_next;
          res_tag   <= tag_q;
          res_valid <= 1'b1;
          running_q <= 1'b0;
          step_q    <= '0;
        end
      end
      if (cmp_start && cmp_ready) begin
        x_q       <= cmp_in;
        tag_q     <= cmp_tag;
        acc_q     <= '0;
        step_q    <= '0;
        running_q <= 1'b1;
      end
    end
  end

  // A macro is either in memory mode or in compute mode, never both.
  a_mode_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && running_q));
  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    cmp_start |-> cmp_ready);

endmodule
