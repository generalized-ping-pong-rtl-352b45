// tb_instr_gen_unit: self-checking test of the instruction generation unit.
// Expands a 3 x 5 tile GeMM (15 tasks) for 4 cores and checks every task
// written (core, entry, weight line, input line, result line, n_in), the
// per-core task counts, one task per cycle, and a second instruction.
module tb_instr_gen_unit;
  import gpp_pkg::*;
  localparam int NC = 4, BEATS = 256, TASKS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [7:0] n_in = 0, k_tiles = 0, n_tiles = 0;
  logic [19:0] w_base = 0;
  logic [NC-1:0] task_we;
  logic [3:0] task_waddr;
  core_task_t task_wdata;
  logic [NC-1:0][4:0] n_tasks;
  instr_gen_unit #(.NC(NC), .BEATS(BEATS), .TASKS(TASKS)) dut (.*);

  int checks = 0, failures = 0;
  int seen;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int ni, input int kt, input int nt, input int wb);
    int cyc;
    n_in = 8'(ni); k_tiles = 8'(kt); n_tiles = 8'(nt); w_base = 20'(wb);
    start = 1; @(negedge clk); start = 0;
    seen = 0; cyc = 0;
    while (!done) begin
      automatic int t = seen;
      check($onehot(task_we) && task_we[t % NC] && task_waddr == 4'(t / NC)
            && task_wdata.w_line == 20'(wb + t * BEATS)
            && task_wdata.in_line == 12'((t % kt) * ni)
            && task_wdata.out_line == 12'((t / kt) * ni)
            && task_wdata.n_in == 8'(ni), $sformatf("task %0d", t));
      seen++; cyc++;
      @(negedge clk);
    end
    check(seen == kt * nt && cyc == kt * nt, $sformatf("%0d tasks in %0d cycles", seen, cyc));
    for (int c = 0; c < NC; c++)
      check(int'(n_tasks[c]) == (kt * nt) / NC + ((c < (kt * nt) % NC) ? 1 : 0), $sformatf("count core %0d", c));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(done, "idle after reset");
    run(7, 3, 5, 100);
    run(2, 2, 2, 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
