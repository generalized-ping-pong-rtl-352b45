// tb_top_ctrl: self-checking test of the top controller.
// A tile-instruction memory model holds two GeMM instructions and an END.
// The instruction generation unit and the cores are modelled by fixed
// delays. The test counts the input-copy, clear and drain beats of each
// GeMM and their addresses, checks the start pulses, the order of phases,
// the run-cycle count and that the controller stops at END.
module tb_top_ctrl;
  import gpp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [5:0] ti_raddr;
  tile_instr_t ti_rdata, cur;
  logic [11:0] im_raddr, in_waddr, clr_line, rd_line, drain_addr;
  logic in_we, clr_en, ig_start, ig_done, core_start, cores_done, drain_valid;
  logic [7:0] drain_ntile;
  logic [31:0] run_cycles;
  logic [15:0] gemm_count;
  top_ctrl dut (.*);

  tile_instr_t prog [4];
  assign ti_rdata = prog[ti_raddr[1:0]];

  // instruction generation unit model: busy 5 cycles after a start
  int ig_cnt = 0;
  assign ig_done = (ig_cnt == 0);
  always @(posedge clk) if (ig_start) ig_cnt <= 5; else if (ig_cnt > 0) ig_cnt <= ig_cnt - 1;
  // cores model: busy CORE_T cycles after a start
  localparam int CORE_T = 37;
  int core_cnt = 0;
  assign cores_done = (core_cnt == 0);
  always @(posedge clk) if (core_start) core_cnt <= CORE_T; else if (core_cnt > 0) core_cnt <= core_cnt - 1;

  int checks = 0, failures = 0;
  int n_inwe, n_clr, n_drain, n_igs, n_cs, bad_addr, order_bad;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // beat counters for the instruction in cur
  always @(posedge clk) if (rst_n) begin
    if (in_we) begin
      if (im_raddr != cur.in_base + 12'(n_inwe) || in_waddr != 12'(n_inwe)) bad_addr++;
      n_inwe++;
    end
    if (clr_en) begin
      if (clr_line != 12'(n_clr)) bad_addr++;
      n_clr++;
    end
    if (drain_valid) begin
      if (drain_addr != cur.out_base + 12'(n_drain) || rd_line != 12'(n_drain)
          || drain_ntile != 8'(n_drain / cur.n_in)) bad_addr++;
      if (n_cs == 0) order_bad++;
      n_drain++;
    end
    if (ig_start) begin n_igs++; if (n_inwe == 0) order_bad++; end
    if (core_start) begin n_cs++; if (n_igs == 0) order_bad++; end
  end

  task automatic expect_gemm(input tile_instr_t ins);
    n_inwe = 0; n_clr = 0; n_drain = 0; n_igs = 0; n_cs = 0; bad_addr = 0; order_bad = 0;
    wait (dut.st_q == dut.S_FLUSH);
    @(negedge clk);
    check(n_inwe == ins.n_in * ins.k_tiles, $sformatf("input copies %0d", n_inwe));
    check(n_clr == ins.n_in * ins.n_tiles, $sformatf("clears %0d", n_clr));
    check(n_drain == ins.n_in * ins.n_tiles, $sformatf("drains %0d", n_drain));
    check(n_igs == 1 && n_cs == 1, "one generate and one core start");
    check(bad_addr == 0 && order_bad == 0, "addresses and phase order");
    check(run_cycles == 32'(CORE_T + 1), $sformatf("run cycles %0d", run_cycles));
    wait (dut.st_q != dut.S_FLUSH);
  endtask

  initial begin
    prog[0] = '0; prog[0].op = OP_GEMM; prog[0].n_in = 3; prog[0].k_tiles = 4; prog[0].n_tiles = 2;
    prog[0].in_base = 12'd40; prog[0].out_base = 12'd100;
    prog[1] = '0; prog[1].op = OP_GEMM; prog[1].n_in = 5; prog[1].k_tiles = 1; prog[1].n_tiles = 3;
    prog[1].in_base = 12'd7; prog[1].out_base = 12'd300;
    prog[2] = '0; prog[2].op = OP_END;
    prog[3] = '0; prog[3].op = OP_GEMM;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(done, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    expect_gemm(prog[0]);
    expect_gemm(prog[1]);
    repeat (4) @(negedge clk);
    check(done && gemm_count == 16'd2, $sformatf("stopped at END after %0d GeMMs", gemm_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
