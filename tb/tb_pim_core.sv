// tb_pim_core: self-checking test of one PIM core (16 macros) under the
// three scheduling strategies, at the paper's running example: 4 active
// macros, weight write : compute = 1 : 3 (a 32x32-byte tile written at
// 4 bytes/cycle takes 256 cycles; 24 input vectors take 24*32 = 768 cycles)
// and an off-chip bandwidth of one writer (4 bytes/cycle).
// For each strategy it runs the same 2 x 4-tile GeMM (8 tasks), checks every
// result line against a reference product computed here, records the peak
// number of concurrently writing macros (GPP 1, naive 2, in situ 4) and the
// run time, and checks that generalized ping-pong is the fastest and close
// to the bandwidth bound of 8 writes of 256 cycles plus the last compute.
module tb_pim_core;
  import gpp_pkg::*;
  localparam int N = 16, WS = 4, BEATS = 256, KT = 2, NT = 4, NI = 24, NTASK = KT * NT;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  strategy_e strat = STRAT_GPP;
  logic [7:0] active = 4, slots = 1;
  logic start = 0, done;
  logic [6:0] n_tasks = 0;
  logic task_we = 0; logic [5:0] task_waddr = 0; core_task_t task_wdata = '0;
  logic in_we = 0; logic [8:0] in_waddr = 0; logic [31:0][7:0] in_wdata = '0;
  logic clr_en = 0; logic [8:0] clr_line = 0, rd_line = 0;
  logic [31:0][31:0] rd_data;
  logic [N-1:0] bw_req, bw_grant;
  logic [N-1:0][19:0] wt_line;
  logic [N-1:0][WS-1:0][7:0] wt_data;
  lane_state_e [N-1:0] lane_st;
  logic [8:0] band = 4;
  logic [8:0] bytes_granted;

  pim_core dut (.*);
  bw_arbiter #(.NREQ(N), .WS(WS), .BAND_MAX(256)) u_arb (
    .clk, .rst_n, .band, .req(bw_req), .grant(bw_grant), .bytes_granted);

  // weight memory model (off-chip side), tile t at lines t*BEATS
  logic signed [7:0] Wm [KT*32][NT*32];
  logic signed [7:0] X [NI][KT*32];
  logic [WS-1:0][7:0] wmem [NTASK*BEATS];
  always_comb for (int i = 0; i < N; i++) wt_data[i] = wmem[wt_line[i][10:0]];

  int checks = 0, failures = 0;
  int peak_wr, cyc, bw_stall, res_stall;
  int t_gpp, t_insitu, t_naive;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && !done) begin
    automatic int w = 0;
    for (int i = 0; i < N; i++) begin
      if (lane_st[i] == LANE_WRITE) w++;
      if (lane_st[i] == LANE_WRITE && !bw_grant[i]) bw_stall++;
      if (dut.m_res_valid[i] && !dut.m_res_ready[i]) res_stall++;
    end
    if (w > peak_wr) peak_wr = w;
    cyc++;
  end

  task automatic run(input strategy_e s, input int nact, input int nslots, output int cycles, output int peak);
    strat = s; active = 8'(nact); slots = 8'(nslots);
    // clear result lines
    for (int l = 0; l < NI * NT; l++) begin
      @(negedge clk); clr_en = 1; clr_line = 9'(l);
    end
    @(negedge clk); clr_en = 0;
    peak_wr = 0; cyc = 0;
    n_tasks = 7'(NTASK); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc; peak = peak_wr;
    // compare results
    for (int nt = 0; nt < NT; nt++) for (int v = 0; v < NI; v++) begin
      automatic int bad = 0;
      rd_line = 9'(nt * NI + v); #1;
      for (int c = 0; c < 32; c++) begin
        automatic int e = 0;
        for (int k = 0; k < KT * 32; k++) e += int'(X[v][k]) * int'(Wm[k][nt * 32 + c]);
        if (int'($signed(rd_data[c])) != e) bad++;
      end
      check(bad == 0, $sformatf("strategy %s: line nt=%0d v=%0d has %0d wrong columns", s.name(), nt, v, bad));
    end
  endtask

  initial begin
    int pk;
    for (int r = 0; r < KT * 32; r++) for (int c = 0; c < NT * 32; c++) Wm[r][c] = 8'($urandom);
    for (int v = 0; v < NI; v++) for (int k = 0; k < KT * 32; k++) X[v][k] = 8'($urandom);
    for (int t = 0; t < NTASK; t++) for (int b = 0; b < BEATS * WS; b++)
      wmem[t * BEATS + b / WS][b % WS] = Wm[(t % KT) * 32 + b / 32][(t / KT) * 32 + b % 32];
    bw_stall = 0; res_stall = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // core instruction memory and input buffer
    for (int t = 0; t < NTASK; t++) begin
      task_we = 1; task_waddr = 6'(t);
      task_wdata.w_line = 20'(t * BEATS);
      task_wdata.in_line = 12'((t % KT) * NI);
      task_wdata.out_line = 12'((t / KT) * NI);
      task_wdata.n_in = 8'(NI);
      @(negedge clk);
    end
    task_we = 0;
    for (int kt = 0; kt < KT; kt++) for (int v = 0; v < NI; v++) begin
      in_we = 1; in_waddr = 9'(kt * NI + v);
      for (int r = 0; r < 32; r++) in_wdata[r] = X[v][kt * 32 + r];
      @(negedge clk);
    end
    in_we = 0;

    run(STRAT_GPP, 4, 1, t_gpp, pk);
    check(pk == 1, $sformatf("GPP peak writers %0d (expected 1)", pk));
    run(STRAT_NAIVE, 4, 1, t_naive, pk);
    check(pk == 2, $sformatf("naive peak writers %0d (expected 2)", pk));
    run(STRAT_IN_SITU, 4, 1, t_insitu, pk);
    check(pk == 4, $sformatf("in situ peak writers %0d (expected 4)", pk));
    $display("cycles: generalized %0d, naive %0d, in situ %0d (bandwidth stalls %0d, result-port stalls %0d)",
             t_gpp, t_naive, t_insitu, bw_stall, res_stall);
    check(t_gpp < t_naive && t_gpp < t_insitu, "generalized ping-pong is the fastest");
    check(t_gpp <= NTASK * BEATS + NI * 32 + NTASK * 4 + 16, $sformatf("GPP near the bandwidth bound: %0d", t_gpp));
    check(bw_stall > 0, "bandwidth stalls happened (shared writers)");
    check(res_stall > 0, "result-port stalls happened");
    // 16 macros, 4 writers at once: full core
    run(STRAT_GPP, 16, 4, t_gpp, pk);
    check(pk == 4, $sformatf("GPP 16 macros peak writers %0d (expected 4)", pk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
