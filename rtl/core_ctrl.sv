// core_ctrl: the core control unit of one PIM core.
//
// The core's instruction memory holds n_tasks weight-tile tasks
// (gpp_pkg::core_task_t). After `start` the unit hands the next task to the
// lowest-numbered enabled lane that is idle, one task per cycle, so a macro
// moves on to its next write/compute job as soon as it finishes the last one.
// Each lane then runs
//   LANE_WREQ  -> (wr_grant from the generalized execution unit)
//   LANE_WRITE -> one WS-byte beat per bandwidth grant, BEATS beats
//   LANE_CREQ  -> (cmp_allow)
//   LANE_COMP  -> n_in input vectors, each started when the macro is ready;
//                 the vector's result line is carried as the macro's tag
//   LANE_IDLE  once the macro has no vector in flight and no result held.
// Results of all lanes go to the core's result buffer through one
// accumulate port, granted round-robin; a lane whose result waits holds its
// macro (a result-port stall). `done` is high while the unit is not running.
//
// The split into lanes, the task format and the in-order dispatch are this
// design's choices; the paper states only that the control unit runs the
// core instructions on the macros the execution unit allows.
module core_ctrl
  import gpp_pkg::*;
#(
  parameter int unsigned N       = gpp_pkg::N_MACROS_D,
  parameter int unsigned BEATS   = gpp_pkg::MACRO_ROWS * gpp_pkg::MACRO_COLS / gpp_pkg::WRITE_SPEED,
  parameter int unsigned TASKS   = 64,
  parameter int unsigned IN_AW   = 9,
  parameter int unsigned RES_AW  = 9,
  parameter int unsigned WL_W    = 20,
  parameter int unsigned TAG_W   = 12,
  localparam int unsigned TA_W   = $clog2(TASKS),
  localparam int unsigned BA_W   = $clog2(BEATS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [TA_W:0]             n_tasks,
  output logic                      done,
  // core instruction memory
  output logic [TA_W-1:0]           task_raddr,
  input  core_task_t                task_rdata,
  // generalized execution unit
  output lane_state_e [N-1:0]       lane_st,
  output logic                      tasks_left,
  input  logic [N-1:0]              lane_en,
  input  logic [N-1:0]              wr_grant,
  input  logic [N-1:0]              cmp_allow,
  // weight path (bandwidth arbiter and weight memory)
  output logic [N-1:0]              bw_req,
  input  logic [N-1:0]              bw_grant,
  output logic [N-1:0][WL_W-1:0]    wt_line,
  // macros
  output logic [N-1:0]              m_wr_en,
  output logic [N-1:0][BA_W-1:0]    m_wr_addr,
  output logic [N-1:0]              m_cmp_start,
  output logic [N-1:0][TAG_W-1:0]   m_cmp_tag,
  input  logic [N-1:0]              m_cmp_ready,
  input  logic [N-1:0]              m_busy,
  input  logic [N-1:0]              m_res_valid,
  output logic [N-1:0]              m_res_ready,
  input  logic [N-1:0][TAG_W-1:0]   m_res_tag,
  // input buffer read ports, one per lane
  output logic [N-1:0][IN_AW-1:0]   in_raddr,
  // result buffer accumulate port
  output logic                      acc_en,
  output logic [RES_AW-1:0]         acc_line,
  output logic [$clog2(N > 1 ? N : 2)-1:0] acc_sel
);
  localparam int unsigned SEL_W = $clog2(N > 1 ? N : 2);

  logic                     running_q;
  logic [TA_W:0]            pc_q;
  core_task_t [N-1:0]       task_q;
  logic [N-1:0][BA_W-1:0]   beat_q;
  logic [N-1:0][7:0]        vec_q;
  lane_state_e [N-1:0]      st_q;
  logic [SEL_W-1:0]         rr_q;
  logic [N-1:0]             take;

  assign lane_st    = st_q;
  assign done       = !running_q;
  assign task_raddr = pc_q[TA_W-1:0];
  assign tasks_left = running_q && (pc_q < n_tasks);

  // Dispatch: lowest-index idle enabled lane takes the next task.
  always_comb begin
    logic given;
    given = 1'b0;
    take  = '0;
    for (int i = 0; i < int'(N); i++) begin
      if (!given && running_q && pc_q < n_tasks && lane_en[i] && st_q[i] == LANE_IDLE) begin
        take[i] = 1'b1;
        given   = 1'b1;
      end
    end
  end

  // Per-lane combinational outputs
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      bw_req[i]      = (st_q[i] == LANE_WRITE);
      wt_line[i]     = task_q[i].w_line + WL_W'(beat_q[i]);
      m_wr_en[i]     = (st_q[i] == LANE_WRITE) && bw_grant[i];
      m_wr_addr[i]   = beat_q[i];
      m_cmp_start[i] = (st_q[i] == LANE_COMP) && (vec_q[i] < task_q[i].n_in) && m_cmp_ready[i];
      m_cmp_tag[i]   = TAG_W'(task_q[i].out_line) + TAG_W'(vec_q[i]);
      in_raddr[i]    = IN_AW'(task_q[i].in_line) + IN_AW'(vec_q[i]);
    end
  end

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int i = 0; i < int'(N); i++) if (st_q[i] != LANE_IDLE) all_idle = 1'b0;
  end

  // Result port: one lane per cycle, round-robin.
  always_comb begin
    logic found;
    logic [SEL_W-1:0] idx;
    found       = 1'b0;
    idx         = '0;
    m_res_ready = '0;
    acc_sel     = '0;
    for (int k = 0; k < int'(N); k++) begin
      idx = SEL_W'((int'(rr_q) + k) % int'(N));
      if (!found && m_res_valid[idx]) begin
        found            = 1'b1;
        m_res_ready[idx] = 1'b1;
        acc_sel          = idx;
      end
    end
    acc_en   = found;
    acc_line = RES_AW'(m_res_tag[acc_sel]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= 1'b0;
      pc_q      <= '0;
      rr_q      <= '0;
      for (int i = 0; i < int'(N); i++) begin
        st_q[i]   <= LANE_IDLE;
        task_q[i] <= '0;
        beat_q[i] <= '0;
        vec_q[i]  <= '0;
      end
    end else begin
      if (start && !running_q) begin
        running_q <= 1'b1;
        pc_q      <= '0;
      end else if (running_q && pc_q == n_tasks && !(|take) && all_idle) begin
        running_q <= 1'b0;
      end
      if (|take) pc_q <= pc_q + 1'b1;
      if (acc_en) rr_q <= (acc_sel == SEL_W'(N - 1)) ? '0 : acc_sel + 1'b1;

      for (int i = 0; i < int'(N); i++) begin
        unique case (st_q[i])
          LANE_IDLE: if (take[i]) begin
            task_q[i] <= task_rdata;
            beat_q[i] <= '0;
            vec_q[i]  <= '0;
            st_q[i]   <= LANE_WREQ;
          end
          LANE_WREQ: if (wr_grant[i]) st_q[i] <= LANE_WRITE;
          LANE_WRITE: if (bw_grant[i]) begin
            beat_q[i] <= beat_q[i] + 1'b1;
            if (beat_q[i] == BA_W'(BEATS - 1)) st_q[i] <= LANE_CREQ;
          end
          LANE_CREQ: if (cmp_allow[i]) st_q[i] <= LANE_COMP;
          LANE_COMP: begin
            if (m_cmp_start[i]) vec_q[i] <= vec_q[i] + 1'b1;
            else if (vec_q[i] == task_q[i].n_in && !m_busy[i]) st_q[i] <= LANE_IDLE;
          end
          default: st_q[i] <= LANE_IDLE;
        endcase
      end
    end
  end
endmodule
