// pim_core: one PIM core of the accelerator.
//
// Holds N_MACROS PIM macros, the generalized execution unit that decides
// which macros may write or compute, the core control unit that runs the
// core's task list on them, the core instruction memory (TASKS entries of
// gpp_pkg::core_task_t) and the core memory unit: an input buffer of
// IN_LINES 32-byte vectors with one read port per macro and an intermediate
// result buffer of RES_LINES lines that accumulates the macros' outputs.
//
// Interface: the top level fills the instruction memory (task_we) and the
// input buffer (in_we), clears result lines (clr_en), sets the strategy,
// the number of active macros and the GPP write slots, pulses start with
// n_tasks and waits for done; it then reads result lines through rd_line.
// Weight beats come from outside: each lane raises bw_req while writing,
// and on bw_grant the weight line it addresses (wt_line) is written into
// its macro. The configuration must be held stable while the core runs.
//
// The composition follows the paper's core (macros, generalized execution
// unit, control unit, memory unit, core instruction memory). The weight
// path is direct: weights are not staged in a core-side weight buffer.
module pim_core
  import gpp_pkg::*;
#(
  parameter int unsigned N_MACROS  = gpp_pkg::N_MACROS_D,
  parameter int unsigned WS        = gpp_pkg::WRITE_SPEED,
  parameter int unsigned TASKS     = 64,
  parameter int unsigned IN_LINES  = 512,
  parameter int unsigned RES_LINES = 2048,
  parameter int unsigned WL_W      = 20,
  localparam int unsigned ROWS     = gpp_pkg::MACRO_ROWS,
  localparam int unsigned COLS     = gpp_pkg::MACRO_COLS,
  localparam int unsigned BEATS    = ROWS * COLS / WS,
  localparam int unsigned TA_W     = $clog2(TASKS),
  localparam int unsigned IN_AW    = $clog2(IN_LINES),
  localparam int unsigned RES_AW   = $clog2(RES_LINES),
  localparam int unsigned TAG_W    = 12
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // configuration (from the tile instruction)
  input  strategy_e                        strat,
  input  logic [7:0]                       active,
  input  logic [7:0]                       slots,
  // control
  input  logic                             start,
  input  logic [TA_W:0]                    n_tasks,
  output logic                             done,
  // core instruction memory write
  input  logic                             task_we,
  input  logic [TA_W-1:0]                  task_waddr,
  input  core_task_t                       task_wdata,
  // input buffer write
  input  logic                             in_we,
  input  logic [IN_AW-1:0]                 in_waddr,
  input  logic [ROWS-1:0][7:0]             in_wdata,
  // result buffer clear and read
  input  logic                             clr_en,
  input  logic [RES_AW-1:0]                clr_line,
  input  logic [RES_AW-1:0]                rd_line,
  output logic [COLS-1:0][ACC_W-1:0]       rd_data,
  // weight path
  output logic [N_MACROS-1:0]              bw_req,
  input  logic [N_MACROS-1:0]              bw_grant,
  output logic [N_MACROS-1:0][WL_W-1:0]    wt_line,
  input  logic [N_MACROS-1:0][WS-1:0][7:0] wt_data,
  // observation
  output lane_state_e [N_MACROS-1:0]       lane_st
);
  localparam int unsigned BA_W  = $clog2(BEATS);
  localparam int unsigned SEL_W = $clog2(N_MACROS > 1 ? N_MACROS : 2);

  logic [N_MACROS-1:0] lane_en, wr_grant, cmp_allow;
  logic                tasks_left;
  logic [TA_W-1:0]     task_raddr;
  core_task_t          task_rdata;
  logic [N_MACROS-1:0][BA_W-1:0]  m_wr_addr;
  logic [N_MACROS-1:0]            m_wr_en, m_cmp_start, m_cmp_ready, m_busy, m_res_valid, m_res_ready;
  logic [N_MACROS-1:0][TAG_W-1:0] m_cmp_tag, m_res_tag;
  logic [N_MACROS-1:0][IN_AW-1:0] in_raddr;
  logic [N_MACROS-1:0][ROWS-1:0][7:0] in_rdata;
  logic [N_MACROS-1:0][COLS-1:0][ACC_W-1:0] m_res_data;
  logic                acc_en;
  logic [RES_AW-1:0]   acc_line;
  logic [SEL_W-1:0]    acc_sel;

  gen_exec_unit #(.N(N_MACROS)) u_geu (
    .strat, .active, .slots, .lane_st, .tasks_left, .lane_en, .wr_grant, .cmp_allow);

  core_ctrl #(
    .N(N_MACROS), .BEATS(BEATS), .TASKS(TASKS), .IN_AW(IN_AW), .RES_AW(RES_AW),
    .WL_W(WL_W), .TAG_W(TAG_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .n_tasks, .done,
    .task_raddr, .task_rdata,
    .lane_st, .tasks_left, .lane_en, .wr_grant, .cmp_allow,
    .bw_req, .bw_grant, .wt_line,
    .m_wr_en, .m_wr_addr, .m_cmp_start, .m_cmp_tag, .m_cmp_ready, .m_busy,
    .m_res_valid, .m_res_ready, .m_res_tag,
    .in_raddr, .acc_en, .acc_line, .acc_sel);

  multiport_ram #(.WIDTH($bits(core_task_t)), .DEPTH(TASKS), .NRD(1)) u_imem (
    .clk, .we(task_we), .waddr(task_waddr), .wdata(task_wdata),
    .raddr(task_raddr), .rdata(task_rdata));

  multiport_ram #(.WIDTH(ROWS * 8), .DEPTH(IN_LINES), .NRD(N_MACROS)) u_inbuf (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(in_raddr), .rdata(in_rdata));

  result_buffer #(.LINES(RES_LINES), .COLS(COLS), .ACC_W(ACC_W)) u_resbuf (
    .clk, .acc_en, .acc_line, .acc_data(m_res_data[acc_sel]),
    .clr_en, .clr_line, .rd_line, .rd_data);

  for (genvar g = 0; g < int'(N_MACROS); g++) begin : g_macro
    pim_macro #(.WS(WS), .TAG_W(TAG_W)) u_macro (
      .clk, .rst_n,
      .wr_en(m_wr_en[g]), .wr_addr(m_wr_addr[g]), .wr_data(wt_data[g]),
      .cmp_start(m_cmp_start[g]), .cmp_in(in_rdata[g]), .cmp_tag(m_cmp_tag[g]),
      .cmp_ready(m_cmp_ready[g]), .busy(m_busy[g]),
      .res_valid(m_res_valid[g]), .res_ready(m_res_ready[g]),
      .res_data(m_res_data[g]), .res_tag(m_res_tag[g]));
  end
endmodule
