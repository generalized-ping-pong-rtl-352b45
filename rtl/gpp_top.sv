// gpp_top: PIM GeMM accelerator with generalized ping-pong scheduling.
//
// N_CORES PIM cores of N_MACROS macros each (32x32-byte int8 macros, 4x8
// operation unit, WS-byte weight writes) share:
//  * the global weight memory (WMEM_LINES lines of WS bytes), loaded from
//    off-chip through wmem_we, with one read port per macro;
//  * the bandwidth arbiter, which lets at most `band` weight bytes per cycle
//    flow from the weight memory into macros (the off-chip bandwidth);
//  * the global input memory (32-byte lines), the tile instruction memory
//    and the bias table of the SFU, loaded from outside;
//  * the top controller, the instruction generation unit, the VPU that sums
//    the cores' intermediate results, the SFU and the global result memory,
//    read from outside through res_raddr.
// Per GeMM instruction, each core schedules its macros with the strategy in
// the instruction (in situ, naive ping-pong or generalized ping-pong), using
// `active_macros` macros and, for generalized ping-pong, `write_slots`
// concurrent writers. lane_st exposes every macro lane's state and
// bytes_granted the weight bytes moved in the current cycle.
//
// Sizes of the memories are this design's choices; the core count, the
// macro count and the macro geometry follow the paper's evaluation setup.
//
// Lint notes: the controller's line addresses are 12 bits wide while the
// per-core buffers at the default sizes use fewer (in_waddr[11:9],
// clr_line[11], rd_line[11]); the SFU tag carries 6 of the 8 tile-index bits
// (drain_ntile[7:6], s_tag[15:12] unused, 64 bias lines); and the op,
// in_base and out_base fields of the current instruction `cur` (bits 90:89
// and 23:0) are used inside top_ctrl only. verilator lists these as unused
// bits.
module gpp_top
  import gpp_pkg::*;
#(
  parameter int unsigned N_CORES    = gpp_pkg::N_CORES_D,
  parameter int unsigned N_MACROS   = gpp_pkg::N_MACROS_D,
  parameter int unsigned WS         = gpp_pkg::WRITE_SPEED,
  parameter int unsigned WMEM_LINES = 65536,
  parameter int unsigned IMEM_LINES = 4096,
  parameter int unsigned RMEM_LINES = 4096,
  parameter int unsigned TI_DEPTH   = 64,
  parameter int unsigned TASKS      = 64,
  parameter int unsigned IN_LINES   = 512,
  parameter int unsigned RES_LINES  = 2048,
  localparam int unsigned NL        = N_CORES * N_MACROS,
  localparam int unsigned ROWS      = gpp_pkg::MACRO_ROWS,
  localparam int unsigned COLS      = gpp_pkg::MACRO_COLS,
  localparam int unsigned WM_AW     = $clog2(WMEM_LINES),
  localparam int unsigned IM_AW     = $clog2(IMEM_LINES),
  localparam int unsigned RM_AW     = $clog2(RMEM_LINES),
  localparam int unsigned TI_AW     = $clog2(TI_DEPTH),
  localparam int unsigned TA_W      = $clog2(TASKS),
  localparam int unsigned BW_W      = $clog2(gpp_pkg::BAND_MAX + 1),
  localparam int unsigned CR_W      = $clog2(gpp_pkg::BAND_MAX + WS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          done,
  input  logic [BW_W-1:0]               band,
  // off-chip side: weight memory load
  input  logic                          wmem_we,
  input  logic [WM_AW-1:0]              wmem_waddr,
  input  logic [WS-1:0][7:0]            wmem_wdata,
  // input memory load
  input  logic                          imem_we,
  input  logic [IM_AW-1:0]              imem_waddr,
  input  logic [ROWS-1:0][7:0]          imem_wdata,
  // tile instruction memory load
  input  logic                          ti_we,
  input  logic [TI_AW-1:0]              ti_waddr,
  input  tile_instr_t                   ti_wdata,
  // SFU bias table load
  input  logic                          bias_we,
  input  logic [5:0]                    bias_waddr,
  input  logic [COLS-1:0][ACC_W-1:0]    bias_wdata,
  // result memory read
  input  logic [RM_AW-1:0]              res_raddr,
  output logic [COLS-1:0][ACC_W-1:0]    res_rdata,
  // observation
  output lane_state_e [NL-1:0]          lane_st,
  output logic [CR_W-1:0]               bytes_granted,
  output logic [31:0]                   run_cycles,
  output logic [15:0]                   gemm_count
);
  localparam int unsigned WL_W = 20;

  tile_instr_t cur, ti_rdata;
  logic [TI_AW-1:0] ti_raddr;
  logic [11:0] im_raddr, in_waddr, clr_line, rd_line, drain_addr;
  logic        in_we, clr_en, ig_start, ig_done, core_start, cores_done, drain_valid;
  logic [7:0]  drain_ntile;
  logic [ROWS-1:0][7:0] im_rdata;

  logic [N_CORES-1:0]            task_we_c;
  logic [TA_W-1:0]               task_waddr;
  core_task_t                    task_wdata;
  logic [N_CORES-1:0][TA_W:0]    n_tasks;
  logic [N_CORES-1:0]            core_done;
  logic [N_CORES-1:0][COLS-1:0][ACC_W-1:0] core_rd;

  logic [NL-1:0]                 bw_req, bw_grant;
  logic [NL-1:0][WL_W-1:0]       wt_line;
  logic [NL-1:0][WM_AW-1:0]      wm_raddr;
  logic [NL-1:0][WS-1:0][7:0]    wt_data;

  logic                          v_valid, s_valid;
  logic [17:0]                   v_tag;
  logic [15:0]                   s_tag;
  logic [COLS-1:0][ACC_W-1:0]    v_data, s_data;

  top_ctrl #(.TI_DEPTH(TI_DEPTH)) u_top_ctrl (
    .clk, .rst_n, .start, .done, .ti_raddr, .ti_rdata, .cur,
    .im_raddr, .in_we, .in_waddr, .clr_en, .clr_line, .rd_line,
    .ig_start, .ig_done, .core_start, .cores_done,
    .drain_valid, .drain_addr, .drain_ntile, .run_cycles, .gemm_count);

  multiport_ram #(.WIDTH($bits(tile_instr_t)), .DEPTH(TI_DEPTH), .NRD(1)) u_tile_imem (
    .clk, .we(ti_we), .waddr(ti_waddr), .wdata(ti_wdata), .raddr(ti_raddr), .rdata(ti_rdata));

  multiport_ram #(.WIDTH(ROWS * 8), .DEPTH(IMEM_LINES), .NRD(1)) u_input_mem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(IM_AW'(im_raddr)), .rdata(im_rdata));

  instr_gen_unit #(.NC(N_CORES), .BEATS(ROWS * COLS / WS), .TASKS(TASKS)) u_igen (
    .clk, .rst_n, .start(ig_start), .n_in(cur.n_in), .k_tiles(cur.k_tiles),
    .n_tiles(cur.n_tiles), .w_base(cur.w_base), .done(ig_done),
    .task_we(task_we_c), .task_waddr, .task_wdata, .n_tasks);

  for (genvar l = 0; l < int'(NL); l++) begin : g_wport
    assign wm_raddr[l] = WM_AW'(wt_line[l]);
  end

  multiport_ram #(.WIDTH(WS * 8), .DEPTH(WMEM_LINES), .NRD(NL)) u_weight_mem (
    .clk, .we(wmem_we), .waddr(wmem_waddr), .wdata(wmem_wdata),
    .raddr(wm_raddr), .rdata(wt_data));

  bw_arbiter #(.NREQ(NL), .WS(WS), .BAND_MAX(gpp_pkg::BAND_MAX)) u_bw_arb (
    .clk, .rst_n, .band, .req(bw_req), .grant(bw_grant), .bytes_granted);

  for (genvar c = 0; c < int'(N_CORES); c++) begin : g_core
    pim_core #(
      .N_MACROS(N_MACROS), .WS(WS), .TASKS(TASKS), .IN_LINES(IN_LINES),
      .RES_LINES(RES_LINES), .WL_W(WL_W)
    ) u_core (
      .clk, .rst_n,
      .strat(cur.strat), .active(cur.active_macros), .slots(cur.write_slots),
      .start(core_start), .n_tasks(n_tasks[c]), .done(core_done[c]),
      .task_we(task_we_c[c]), .task_waddr, .task_wdata,
      .in_we, .in_waddr($clog2(IN_LINES)'(in_waddr)), .in_wdata(im_rdata),
      .clr_en, .clr_line($clog2(RES_LINES)'(clr_line)),
      .rd_line($clog2(RES_LINES)'(rd_line)), .rd_data(core_rd[c]),
      .bw_req(bw_req[c*N_MACROS +: N_MACROS]), .bw_grant(bw_grant[c*N_MACROS +: N_MACROS]),
      .wt_line(wt_line[c*N_MACROS +: N_MACROS]), .wt_data(wt_data[c*N_MACROS +: N_MACROS]),
      .lane_st(lane_st[c*N_MACROS +: N_MACROS]));
  end

  assign cores_done = &core_done;

  vpu #(.NC(N_CORES), .TAG_W(18)) u_vpu (
    .clk, .rst_n, .in_valid(drain_valid), .in_tag({drain_ntile[5:0], drain_addr}),
    .in_data(core_rd), .out_valid(v_valid), .out_tag(v_tag), .out_data(v_data));

  sfu #(.TAG_W(16), .BIAS_LINES(64)) u_sfu (
    .clk, .rst_n, .bias_we, .bias_waddr, .bias_wdata,
    .in_valid(v_valid), .in_tag(16'(v_tag[11:0])), .in_ntile(v_tag[17:12]),
    .bias_en(cur.bias_en), .act(cur.act), .in_data(v_data),
    .out_valid(s_valid), .out_tag(s_tag), .out_data(s_data));

  multiport_ram #(.WIDTH(COLS * ACC_W), .DEPTH(RMEM_LINES), .NRD(1)) u_result_mem (
    .clk, .we(s_valid), .waddr(RM_AW'(s_tag)), .wdata(s_data),
    .raddr(res_raddr), .rdata(res_rdata));
endmodule
