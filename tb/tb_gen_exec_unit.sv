// tb_gen_exec_unit: self-checking test of the generalized execution unit.
// Drives lane-state patterns for the three strategies and compares the
// write grants and compute permissions with values worked out by hand from
// the scheduling rules: generalized ping-pong caps concurrent writers at the
// slot count, in situ writes and computes all lanes together, naive
// ping-pong alternates two banks.
module tb_gen_exec_unit;
  import gpp_pkg::*;
  localparam int N = 16;

  strategy_e strat;
  logic [7:0] active, slots;
  lane_state_e [N-1:0] lane_st;
  logic tasks_left = 0;
  logic [N-1:0] lane_en, wr_grant, cmp_allow;

  gen_exec_unit #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [N-1:0] got, input logic [N-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic set_all(input lane_state_e s);
    for (int i = 0; i < N; i++) lane_st[i] = s;
  endtask

  initial begin
    // ---------------- generalized ping-pong ----------------
    strat = STRAT_GPP; active = 16; slots = 4;
    set_all(LANE_WREQ); #1;
    expect_eq(lane_en, 16'hFFFF, "gpp lane_en");
    expect_eq(wr_grant, 16'h000F, "gpp 4 slots from idle");
    expect_eq(cmp_allow, 16'hFFFF, "gpp compute always allowed");
    lane_st[0] = LANE_WRITE; lane_st[1] = LANE_WRITE; lane_st[2] = LANE_COMP; #1;
    expect_eq(wr_grant, 16'h0018, "gpp 2 writing, 2 free slots");
    for (int i = 0; i < 4; i++) lane_st[i] = LANE_WRITE; #1;
    expect_eq(wr_grant, 16'h0000, "gpp slots full");
    active = 6; slots = 1; set_all(LANE_WREQ); #1;
    expect_eq(lane_en, 16'h003F, "gpp 6 active");
    expect_eq(wr_grant, 16'h0001, "gpp one slot");
    expect_eq(cmp_allow, 16'h003F, "gpp cmp only enabled");
    lane_st[0] = LANE_CREQ; #1;
    expect_eq(wr_grant, 16'h0002, "gpp staggered: lane 1 after lane 0");

    // ---------------- in situ write/compute ----------------
    strat = STRAT_IN_SITU; active = 16; set_all(LANE_WREQ); #1;
    expect_eq(wr_grant, 16'hFFFF, "insitu all write together");
    lane_st[5] = LANE_COMP; #1;
    expect_eq(wr_grant, 16'h0000, "insitu waits for the busy lane");
    lane_st[5] = LANE_IDLE; tasks_left = 1; #1;
    expect_eq(wr_grant, 16'h0000, "insitu waits for a lane still getting a task");
    tasks_left = 0; #1;
    expect_eq(wr_grant, 16'hFFDF, "insitu last round with fewer tasks");
    set_all(LANE_CREQ); lane_st[9] = LANE_WRITE; #1;
    expect_eq(cmp_allow, 16'h0000, "insitu no compute while a lane writes");
    lane_st[9] = LANE_CREQ; #1;
    expect_eq(cmp_allow, 16'hFFFF, "insitu all compute together");

    // ---------------- naive ping-pong ----------------
    strat = STRAT_NAIVE; active = 4; set_all(LANE_IDLE);
    for (int i = 0; i < 4; i++) lane_st[i] = LANE_WREQ; #1;
    expect_eq(wr_grant, 16'h0003, "naive bank 1 writes first");
    lane_st[0] = LANE_WRITE; lane_st[1] = LANE_WRITE; #1;
    expect_eq(wr_grant, 16'h0000, "naive bank 2 waits for bank 1 write");
    lane_st[0] = LANE_CREQ; lane_st[1] = LANE_CREQ; #1;
    expect_eq(wr_grant, 16'h000C, "naive bank 2 writes while bank 1 loaded");
    expect_eq(cmp_allow & 16'h0003, 16'h0003, "naive bank 1 may compute");
    lane_st[0] = LANE_COMP; lane_st[1] = LANE_COMP; lane_st[2] = LANE_CREQ; lane_st[3] = LANE_CREQ; #1;
    expect_eq(cmp_allow & 16'h000C, 16'h0000, "naive bank 2 waits for bank 1 compute");
    lane_st[0] = LANE_WREQ; lane_st[1] = LANE_WREQ; #1;
    expect_eq(cmp_allow & 16'h000C, 16'h000C, "naive bank 2 computes after bank 1");
    expect_eq(wr_grant, 16'h0003, "naive bank 1 rewrites");
    lane_st[0] = LANE_WREQ; lane_st[1] = LANE_COMP; #1;
    expect_eq(wr_grant, 16'h0000, "naive bank waits for all its lanes");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
