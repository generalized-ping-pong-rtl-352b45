// tb_gpp_top_full: full-size end-to-end test (16 cores of 16 macros, default
// parameters). One GeMM in the design point of the paper's design-phase
// study at band = 128 bytes/cycle: 56 input vectors per batch make
// time_PIM : time_rewrite = 56*32 : 256 = 7 : 1, so
// num_macro = (7+1)/1 * 128/4 = 256 macros and 2 of each core's 16 macros
// write at a time; 8 x 32 weight tiles (256 tasks, one per macro) are
// run with generalized ping-pong. The run phase must keep the 128
// bytes/cycle saturated while writes last.
//
// The testbench plays the host and the off-chip memory: it loads the
// weight memory, the input memory, the SFU bias table and a program of tile
// instructions, sets the off-chip bandwidth, starts the accelerator and
// waits for done. For every GeMM it computes Y = act(X*W + b) here and
// compares every result-memory line. It also measures each GeMM's run
// phase and counts the mechanisms of the design: cycles where a writing
// macro had no bandwidth (bandwidth stall), cycles where a finished result
// waited for the core's result port (result-port stall), the peak number of
// macros writing at once per core under each strategy, GeMMs whose results
// needed the VPU to add contributions of several cores, and the use of
// each SFU function. A mechanism that never occurred counts as a failure.
module tb_gpp_top_full;
  import gpp_pkg::*;
  localparam int NC = 16, NM = 16, WS = 4, BEATS = 256;
  localparam int NG = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  logic [8:0] band = 9'd128;
  logic wmem_we = 0; logic [16-1:0] wmem_waddr = '0; logic [WS-1:0][7:0] wmem_wdata = '0;
  logic imem_we = 0; logic [12-1:0] imem_waddr = '0; logic [31:0][7:0] imem_wdata = '0;
  logic ti_we = 0; logic [5:0] ti_waddr = '0; tile_instr_t ti_wdata = '0;
  logic bias_we = 0; logic [5:0] bias_waddr = '0; logic [31:0][31:0] bias_wdata = '0;
  logic [12-1:0] res_raddr = '0;
  logic [31:0][31:0] res_rdata;
  lane_state_e [NC*NM-1:0] lane_st;
  logic [8:0] bytes_granted;
  logic [31:0] run_cycles;
  logic [15:0] gemm_count;

  gpp_top  dut (.*);

  // program: one entry per GeMM
  tile_instr_t prog [NG];
  int bias [64][32];

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // deterministic pseudo-random operands, worked out independently here
  function automatic logic signed [7:0] wval(input int g, input int r, input int c);
    return 8'((g * 131 + r * 37 + c * 11 + (r * c) % 7) % 251 - 125);
  endfunction
  function automatic logic signed [7:0] xval(input int g, input int v, input int k);
    return 8'((g * 17 + v * 29 + k * 13 + (v * k) % 5) % 241 - 120);
  endfunction

  // mechanism counters
  // GeMMs that name the same weight base share one weight set
  function automatic int wgrp(input int g);
    for (int h = 0; h < g; h++) if (prog[h].w_base == prog[g].w_base) return h;
    return g;
  endfunction

  longint bytes_moved = 0;
  longint gbytes [NG], gcomp [NG];
  int bw_stall = 0, res_stall = 0, vpu_multi = 0, n_relu = 0, n_sig = 0, n_bias = 0;
  int peak [NG];
  int cur_g = 0;
  always @(posedge clk) if (rst_n && !done) begin
    bytes_moved += longint'(bytes_granted);
    gbytes[cur_g] += longint'(bytes_granted);
    for (int l = 0; l < NC*NM; l++) if (lane_st[l] == LANE_COMP) gcomp[cur_g]++;
    for (int c = 0; c < NC; c++) begin
      automatic int w = 0;
      for (int m = 0; m < NM; m++) begin
        if (lane_st[c*NM+m] == LANE_WRITE) w++;
        if (lane_st[c*NM+m] == LANE_WRITE && !dut.bw_grant[c*NM+m]) bw_stall++;
      end
      if (w > peak[cur_g]) peak[cur_g] = w;
    end
    for (int l = 0; l < NC*NM; l++)
      if (dut.g_core[0].u_core.m_res_valid[l % NM] && !dut.g_core[0].u_core.m_res_ready[l % NM] && l < NM) res_stall++;
  end
  always @(posedge clk) if (rst_n) cur_g <= (int'(gemm_count) < NG) ? int'(gemm_count) : NG - 1;

  task automatic load_and_check();
    int y, acc;
    // weights, inputs
    for (int g = 0; g < NG; g++) begin
      automatic tile_instr_t p = prog[g];
      if (wgrp(g) == g) for (int t = 0; t < p.k_tiles * p.n_tiles; t++)
        for (int b = 0; b < BEATS; b++) begin
          @(negedge clk);
          wmem_we = 1; wmem_waddr = $bits(wmem_waddr)'(p.w_base + t * BEATS + b);
          for (int j = 0; j < WS; j++)
            wmem_wdata[j] = wval(wgrp(g), (t % p.k_tiles) * 32 + (b * WS + j) / 32, (t / p.k_tiles) * 32 + (b * WS + j) % 32);
        end
      for (int kt = 0; kt < p.k_tiles; kt++)
        for (int v = 0; v < p.n_in; v++) begin
          @(negedge clk);
          wmem_we = 0; imem_we = 1; imem_waddr = $bits(imem_waddr)'(p.in_base + kt * p.n_in + v);
          for (int r = 0; r < 32; r++) imem_wdata[r] = xval(g, v, kt * 32 + r);
        end
      @(negedge clk); imem_we = 0; wmem_we = 0;
      ti_we = 1; ti_waddr = 6'(g); ti_wdata = p;
    end
    @(negedge clk); ti_we = 1; ti_waddr = 6'(NG); ti_wdata = '0; ti_wdata.op = OP_END;
    for (int l = 0; l < 64; l++) begin
      @(negedge clk); ti_we = 0; bias_we = 1; bias_waddr = 6'(l);
      for (int c = 0; c < 32; c++) begin
        bias[l][c] = (l * 97 + c * 53) % 2001 - 1000;
        bias_wdata[c] = 32'(bias[l][c]);
      end
    end
    @(negedge clk); bias_we = 0;
  endtask

  task automatic check_gemm(input int g);
    automatic tile_instr_t p = prog[g];
    automatic int bad = 0;
    for (int nt = 0; nt < p.n_tiles; nt++)
      for (int v = 0; v < p.n_in; v++) begin
        res_raddr = $bits(res_raddr)'(p.out_base + nt * p.n_in + v); #1;
        for (int c = 0; c < 32; c++) begin
          automatic int acc = 0;
          for (int k = 0; k < p.k_tiles * 32; k++) acc += int'(xval(g, v, k)) * int'(wval(wgrp(g), k, nt * 32 + c));
          if (p.bias_en) acc += bias[nt][c];
          case (p.act)
            ACT_RELU:    if (acc < 0) acc = 0;
            ACT_SIGMOID: begin
              acc = (acc >>> 2) + 128;
              if (acc < 0) acc = 0;
              if (acc > 256) acc = 256;
            end
            default: ;
          endcase
          if (int'($signed(res_rdata[c])) != acc) bad++;
        end
      end
    check(bad == 0, $sformatf("GeMM %0d: %0d wrong result words", g, bad));
    if (p.k_tiles > 1 && NC > 1) vpu_multi++;
    if (p.act == ACT_RELU) n_relu++;
    if (p.act == ACT_SIGMOID) n_sig++;
    if (p.bias_en) n_bias++;
  endtask

  function automatic tile_instr_t mk(input strategy_e s, input int act_m, input int sl, input int ni,
                                     input int kt, input int nt, input int wb, input int ib, input int ob,
                                     input act_e a, input bit be);
    tile_instr_t p = '0;
    p.op = OP_GEMM; p.strat = s; p.act = a; p.bias_en = be;
    p.active_macros = 8'(act_m); p.write_slots = 8'(sl); p.n_in = 8'(ni);
    p.k_tiles = 8'(kt); p.n_tiles = 8'(nt); p.w_base = 20'(wb); p.in_base = 12'(ib); p.out_base = 12'(ob);
    return p;
  endfunction

  int tg [NG];
  initial begin
    prog[0] = mk(STRAT_GPP, 16, 2, 56, 8, 32, 0, 0, 0, ACT_RELU, 1'b1);
    for (int g = 0; g < NG; g++) begin peak[g] = 0; gbytes[g] = 0; gcomp[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_and_check();
    start = 1; @(negedge clk); start = 0;
    for (int g = 0; g < NG; g++) begin
      wait (int'(gemm_count) == g + 1);
      tg[g] = int'(run_cycles);

    end
    wait (done);
    for (int g = 0; g < NG; g++) check_gemm(g);
    check(peak[0] == 2, $sformatf("GPP: two writers per core (%0d)", peak[0]));
    // at the design point the writers exactly fill the bandwidth: no stalls
    check(bw_stall == 0, $sformatf("no bandwidth stall at the design point (%0d)", bw_stall));
    check(bytes_moved == 64'(256 * 1024), $sformatf("all 256 tiles moved (%0d bytes)", bytes_moved));
    // 256 tiles * 1024 bytes / 128 bytes per cycle = 2048 cycles of writes,
    // then the last macros compute 56 vectors (1792 cycles)
    check(tg[0] >= 2048 + 1792 && tg[0] <= 2048 + 1792 + 200, $sformatf("run time %0d cycles", tg[0]));
    $display("mechanisms: bandwidth stalls %0d, result-port stalls %0d, multi-core VPU sums %0d, bias %0d, ReLU %0d, sigmoid %0d",
             bw_stall, res_stall, vpu_multi, n_bias, n_relu, n_sig);
    for (int g = 0; g < NG; g++) $display("GeMM %0d: strategy %s, run %0d cycles, peak writers per core %0d", g, prog[g].strat.name(), tg[g], peak[g]);
    if (NC > 1) check(vpu_multi > 0, "VPU summed several cores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
