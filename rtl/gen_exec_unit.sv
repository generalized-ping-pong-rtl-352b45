// gen_exec_unit: the generalized execution unit of one PIM core.
//
// It looks at the state of every macro lane (gpp_pkg::lane_state_e) and
// decides, each cycle and purely combinationally, which waiting lanes may
// start writing weights (wr_grant) and which loaded lanes may start
// computing (cmp_allow). Lanes at or above `active` are disabled (lane_en=0)
// and the core control unit gives them no work. Three strategies:
//
//  * STRAT_GPP (generalized ping-pong): at most `slots` lanes write at once.
//    Waiting lanes are granted in index order as slots free up, and a lane
//    computes as soon as its write ends. With slots chosen as
//    active*t_write/(t_write+t_compute) the writes of the lanes fall into a
//    staggered pattern: lane i+1 starts writing when lane i has finished.
//  * STRAT_IN_SITU: writes are granted only when no enabled lane is busy
//    and none still waits for a task (tasks_left), so all lanes write together; computing is allowed only once no lane
//    is writing, so all lanes compute together.
//  * STRAT_NAIVE (ping-pong): lanes [0,active/2) form bank 1 and the rest
//    bank 2. A bank writes only when none of its lanes is busy or still
//    waiting for a task, and the other
//    bank is not writing; it computes only when the other bank is not
//    computing. Bank 1 wins ties.
//
// The strategies follow the paper's description of the three schedules;
// how the unit detects the ends of phases (the lane states) and the index
// order of grants are this design's choices.
module gen_exec_unit
  import gpp_pkg::*;
#(
  parameter int unsigned N = gpp_pkg::N_MACROS_D
) (
  input  strategy_e                 strat,
  input  logic [7:0]                active,   // number of enabled lanes
  input  logic [7:0]                slots,    // GPP concurrent writers
  input  lane_state_e [N-1:0]       lane_st,
  input  logic                      tasks_left, // tasks not yet handed out
  output logic [N-1:0]              lane_en,
  output logic [N-1:0]              wr_grant,
  output logic [N-1:0]              cmp_allow
);
  always_comb begin
    int unsigned writing, half;
    logic any_busy, any_write, any_idle, b1_idle, b2_idle;
    logic b1_busy, b2_busy, b1_write, b2_write, b1_comp, b2_comp, b1_req, b2_req;
    logic b1_go, b2_go, b1_cmp, b2_cmp;

    wr_grant  = '0;
    cmp_allow = '0;
    half      = int'(active) / 2;
    for (int i = 0; i < int'(N); i++) lane_en[i] = (i < int'(active));

    writing   = 0;
    any_busy  = 1'b0;
    any_write = 1'b0;
    any_idle  = 1'b0; b1_idle = 1'b0; b2_idle = 1'b0;
    b1_busy = 1'b0; b2_busy = 1'b0; b1_write = 1'b0; b2_write = 1'b0;
    b1_comp = 1'b0; b2_comp = 1'b0; b1_req = 1'b0; b2_req = 1'b0;
    b1_go = 1'b0; b2_go = 1'b0; b1_cmp = 1'b0; b2_cmp = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      if (lane_en[i]) begin
        if (lane_st[i] == LANE_WRITE) writing++;
        if (lane_st[i] inside {LANE_WRITE, LANE_CREQ, LANE_COMP}) begin
          any_busy = 1'b1;
          if (i < int'(half)) b1_busy = 1'b1; else b2_busy = 1'b1;
        end
        if (lane_st[i] == LANE_WRITE) begin
          any_write = 1'b1;
          if (i < int'(half)) b1_write = 1'b1; else b2_write = 1'b1;
        end
        if (lane_st[i] == LANE_COMP) begin
          if (i < int'(half)) b1_comp = 1'b1; else b2_comp = 1'b1;
        end
        if (lane_st[i] == LANE_WREQ) begin
          if (i < int'(half)) b1_req = 1'b1; else b2_req = 1'b1;
        end
        // a lane still waiting for a task keeps a synchronized group back
        if (lane_st[i] == LANE_IDLE && tasks_left) begin
          any_idle = 1'b1;
          if (i < int'(half)) b1_idle = 1'b1; else b2_idle = 1'b1;
        end
      end
    end

    unique case (strat)
      STRAT_GPP: begin
        for (int i = 0; i < int'(N); i++) begin
          if (lane_en[i] && lane_st[i] == LANE_WREQ && writing < int'(slots)) begin
            wr_grant[i] = 1'b1;
            writing++;
          end
          cmp_allow[i] = lane_en[i];
        end
      end
      STRAT_IN_SITU: begin
        for (int i = 0; i < int'(N); i++) begin
          wr_grant[i]  = lane_en[i] && lane_st[i] == LANE_WREQ && !any_busy && !any_idle;
          cmp_allow[i] = lane_en[i] && !any_write;
        end
      end
      STRAT_NAIVE: begin
        // With a single enabled lane there is no second bank: it behaves as bank 2.
        b1_go  = b1_req && !b1_busy && !b1_idle && !b2_write;
        b2_go  = b2_req && !b2_busy && !b2_idle && !b1_write && !b1_go;
        b1_cmp = !b1_write && !b2_comp;
        b2_cmp = !b2_write && !b1_comp && !(b1_cmp && b1_busy && !b1_comp);
        for (int i = 0; i < int'(N); i++) begin
          if (lane_en[i] && lane_st[i] == LANE_WREQ)
            wr_grant[i] = (i < int'(half)) ? b1_go : b2_go;
          cmp_allow[i] = lane_en[i] && ((i < int'(half)) ? b1_cmp : b2_cmp);
        end
      end
      default: ;
    endcase
  end
endmodule
