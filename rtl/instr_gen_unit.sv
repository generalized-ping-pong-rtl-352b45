// instr_gen_unit: expands one tile-level GeMM instruction into core tasks.
//
// For Y = X * W with k_tiles x n_tiles weight tiles of 32x32 bytes, task t
// (t = nt*k_tiles + kt) loads weight tile t, stored at weight-memory line
// w_base + t*BEATS, and multiplies it with the n_in input vectors of k-tile
// kt (input-buffer lines kt*n_in .. kt*n_in+n_in-1), accumulating into the
// result lines of n-tile nt (nt*n_in ..). Tasks are dealt round-robin to the
// NC cores: task t goes to core t mod NC, entry t div NC of its instruction
// memory. One task is written per cycle after `start`; `done` rises when all
// are written and n_tasks[c] then holds the count of core c.
//
// The paper names the instruction generation unit and shows it turning tile
// instructions into core instructions; the task layout and the round-robin
// distribution are this design's choices. The task's n_in field is the
// instruction's n_in passed straight through (8 output bits wired to an
// input).
module instr_gen_unit
  import gpp_pkg::*;
#(
  parameter int unsigned NC    = gpp_pkg::N_CORES_D,
  parameter int unsigned BEATS = gpp_pkg::MACRO_ROWS * gpp_pkg::MACRO_COLS / gpp_pkg::WRITE_SPEED,
  parameter int unsigned TASKS = 64,
  localparam int unsigned TA_W = $clog2(TASKS),
  localparam int unsigned CI_W = $clog2(NC > 1 ? NC : 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [7:0]             n_in,
  input  logic [7:0]             k_tiles,
  input  logic [7:0]             n_tiles,
  input  logic [19:0]            w_base,
  output logic                   done,
  output logic [NC-1:0]          task_we,
  output logic [TA_W-1:0]        task_waddr,
  output core_task_t             task_wdata,
  output logic [NC-1:0][TA_W:0]  n_tasks
);
  logic            busy_q;
  logic [7:0]      kt_q, nt_q;
  logic [CI_W-1:0] core_q;
  logic [TA_W-1:0] slot_q;
  logic [19:0]     wl_q;

  assign done = !busy_q;

  always_comb begin
    task_we             = '0;
    task_we[core_q]     = busy_q;
    task_waddr          = slot_q;
    task_wdata.w_line   = wl_q;
    task_wdata.in_line  = 12'(kt_q * n_in);
    task_wdata.out_line = 12'(nt_q * n_in);
    task_wdata.n_in     = n_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      kt_q    <= '0;
      nt_q    <= '0;
      core_q  <= '0;
      slot_q  <= '0;
      wl_q    <= '0;
      n_tasks <= '0;
    end else if (start && !busy_q) begin
      busy_q  <= (k_tiles != 0) && (n_tiles != 0);
      kt_q    <= '0;
      nt_q    <= '0;
      core_q  <= '0;
      slot_q  <= '0;
      wl_q    <= w_base;
      n_tasks <= '0;
    end else if (busy_q) begin
      n_tasks[core_q] <= n_tasks[core_q] + 1'b1;
      wl_q <= wl_q + 20'(BEATS);
      if (core_q == CI_W'(NC - 1)) begin
        core_q <= '0;
        slot_q <= slot_q + 1'b1;
      end else begin
        core_q <= core_q + 1'b1;
      end
      if (kt_q == k_tiles - 1) begin
        kt_q <= '0;
        nt_q <= nt_q + 1'b1;
        if (nt_q == n_tiles - 1) busy_q <= 1'b0;
      end else begin
        kt_q <= kt_q + 1'b1;
      end
    end
  end
endmodule
