// tb_core_ctrl: self-checking test of the core control unit alone.
// Four lanes, of which three are enabled; 8-beat weight tiles; a random
// bandwidth grant; simple macro models (3-cycle compute, result held until
// accepted). Ten tasks with different n_in are run. The test checks that
// every task's beats arrive in order with the right weight line, that every
// input vector is issued with the right input line and result tag, that
// every result line is accumulated exactly the expected number of times,
// that the disabled lane stays idle and that done returns at the end.
module tb_core_ctrl;
  import gpp_pkg::*;
  localparam int N = 4, BEATS = 8, TASKS = 16, NT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, tasks_left;
  logic [4:0] n_tasks = 0;
  logic [3:0] task_raddr;
  core_task_t task_rdata;
  lane_state_e [N-1:0] lane_st;
  logic [N-1:0] lane_en = 4'b0111, wr_grant, cmp_allow, bw_req, bw_grant;
  logic [N-1:0][19:0] wt_line;
  logic [N-1:0] m_wr_en, m_cmp_start, m_cmp_ready, m_busy, m_res_valid, m_res_ready;
  logic [N-1:0][2:0] m_wr_addr;
  logic [N-1:0][11:0] m_cmp_tag, m_res_tag;
  logic [N-1:0][8:0] in_raddr;
  logic acc_en;
  logic [8:0] acc_line;
  logic [1:0] acc_sel;

  core_ctrl #(.N(N), .BEATS(BEATS), .TASKS(TASKS)) dut (.*);

  core_task_t prog [TASKS];
  assign task_rdata = prog[task_raddr];
  // permissive execution unit model
  always_comb for (int i = 0; i < N; i++) begin
    wr_grant[i]  = lane_en[i] && lane_st[i] == LANE_WREQ;
    cmp_allow[i] = lane_en[i];
  end
  // random bandwidth
  logic [N-1:0] rnd;
  always @(posedge clk) rnd <= N'($urandom);
  assign bw_grant = bw_req & rnd;
  // macro models
  int mcnt [N];
  logic [N-1:0][11:0] mtag;
  logic [N-1:0] mres;
  always_comb for (int i = 0; i < N; i++) begin
    m_cmp_ready[i] = (mcnt[i] == 0) && !mres[i];
    m_busy[i]      = (mcnt[i] != 0) || mres[i];
    m_res_valid[i] = mres[i];
    m_res_tag[i]   = mtag[i];
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin mcnt[i] <= 0; mres[i] <= 0; mtag[i] <= '0; end
    end else for (int i = 0; i < N; i++) begin
      if (mres[i] && m_res_ready[i]) mres[i] <= 0;
      if (m_cmp_start[i]) begin mcnt[i] <= 3; mtag[i] <= m_cmp_tag[i]; end
      else if (mcnt[i] == 1) begin mcnt[i] <= 0; mres[i] <= 1; end
      else if (mcnt[i] > 1) mcnt[i] <= mcnt[i] - 1;
    end
  end

  int checks = 0, failures = 0;
  int exp_acc [512], got_acc [512];
  int beat_exp [N], vec_exp [N], bad_beat, bad_vec, lane3_used;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (lane_st[i] == LANE_IDLE) begin beat_exp[i] = 0; vec_exp[i] = 0; end
      if (m_wr_en[i]) begin
        if (int'(m_wr_addr[i]) != beat_exp[i] || wt_line[i] != dut.task_q[i].w_line + 20'(beat_exp[i])) bad_beat++;
        beat_exp[i]++;
      end
      if (m_cmp_start[i]) begin
        if (beat_exp[i] != BEATS) bad_beat++;
        if (in_raddr[i] != 9'(dut.task_q[i].in_line) + 9'(vec_exp[i])
            || m_cmp_tag[i] != dut.task_q[i].out_line + 12'(vec_exp[i])) bad_vec++;
        vec_exp[i]++;
      end
      if (i == 3 && lane_st[i] != LANE_IDLE) lane3_used++;
    end
    if (acc_en) begin
      got_acc[acc_line]++;
      if (!m_res_ready[acc_sel] || $countones(m_res_ready) != 1) bad_vec++;
    end
  end

  initial begin
    int nres;
    for (int l = 0; l < 512; l++) begin exp_acc[l] = 0; got_acc[l] = 0; end
    nres = 0;
    for (int t = 0; t < NT; t++) begin
      prog[t].w_line   = 20'(1000 + t * BEATS);
      prog[t].in_line  = 12'(t * 3);
      prog[t].out_line = 12'((t % 3) * 20);
      prog[t].n_in     = 8'(1 + t % 5);
      for (int v = 0; v < 1 + t % 5; v++) exp_acc[(t % 3) * 20 + v]++;
      nres += 1 + t % 5;
    end
    for (int t = NT; t < TASKS; t++) prog[t] = '0;
    bad_beat = 0; bad_vec = 0; lane3_used = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(done, "idle after reset");
    n_tasks = 5'(NT); start = 1;
    @(negedge clk); start = 0;
    check(!done, "running after start");
    while (!done) @(negedge clk);
    begin
      automatic int badl = 0, total = 0;
      for (int l = 0; l < 512; l++) begin
        if (got_acc[l] != exp_acc[l]) badl++;
        total += got_acc[l];
      end
      check(badl == 0 && total == nres, $sformatf("%0d accumulations, %0d lines wrong", total, badl));
    end
    check(bad_beat == 0, $sformatf("weight beats: %0d errors", bad_beat));
    check(bad_vec == 0, $sformatf("vectors/results: %0d errors", bad_vec));
    check(lane3_used == 0, "disabled lane stayed idle");
    check(!tasks_left, "no tasks left");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
