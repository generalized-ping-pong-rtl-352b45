// tb_pim_macro: self-checking test of one PIM macro.
// Writes a random 32x32 int8 tile at WS bytes/cycle (memory mode), then
// streams random input vectors back to back (compute mode) and compares each
// result vector and tag with a reference product computed here. It also
// checks the compute rate: one vector per (32*32)/(4*8) = 32 cycles once
// streaming, and that res_valid holds while res_ready is low.
module tb_pim_macro;
  localparam int ROWS = 32, COLS = 32, WS = 4, BEATS = ROWS * COLS / WS, STEPS = 32;
  localparam int NV = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0;
  logic [$clog2(BEATS)-1:0] wr_addr = '0;
  logic [WS-1:0][7:0] wr_data = '0;
  logic cmp_start = 0, cmp_ready, busy, res_valid, res_ready = 1;
  logic [ROWS-1:0][7:0] cmp_in = '0;
  logic [11:0] cmp_tag = '0, res_tag;
  logic [COLS-1:0][31:0] res_data;

  pim_macro dut (.*);

  int checks = 0, failures = 0;
  logic signed [7:0] W [ROWS][COLS];
  logic signed [7:0] X [NV][ROWS];
  int got = 0;
  longint t_res [NV];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // watchdog
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result monitor
  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      automatic int exp;
      automatic int bad = 0;
      for (int c = 0; c < COLS; c++) begin
        exp = 0;
        for (int r = 0; r < ROWS; r++) exp += int'(X[got][r]) * int'(W[r][c]);
        if ($signed(res_data[c]) != exp) bad++;
      end
      check(bad == 0, $sformatf("vector %0d: %0d wrong columns", got, bad));
      check(res_tag == 12'(100 + got), "tag");
      t_res[got] = cyc;
      got++;
    end
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[r][c] = 8'($urandom);
    for (int v = 0; v < NV; v++) for (int r = 0; r < ROWS; r++) X[v][r] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // memory mode: BEATS cycles
    for (int b = 0; b < BEATS; b++) begin
      wr_en <= 1; wr_addr <= $bits(wr_addr)'(b);
      for (int k = 0; k < WS; k++) wr_data[k] <= W[(b*WS+k)/COLS][(b*WS+k)%COLS];
      @(posedge clk);
    end
    wr_en <= 0;
    check(!busy, "idle after write");
    // hold the output register after the third result: the macro must stall
    fork
      begin
        wait (got == 3);
        @(negedge clk);
        res_ready = 0;
        repeat (40) @(negedge clk);
        check(res_valid && got == 3 && !cmp_ready, "result held while res_ready low");
        res_ready = 1;
      end
    join_none
    // compute mode: stream NV vectors back to back; stimulus changes on the
    // falling edge so that cmp_ready is read after the rising edge settled
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      while (!cmp_ready) @(negedge clk);
      for (int r = 0; r < ROWS; r++) cmp_in[r] = X[v][r];
      cmp_tag   = 12'(100 + v);
      cmp_start = 1;
      @(negedge clk);
      cmp_start = 0;
    end
    wait (got == NV);
    @(posedge clk);
    for (int v = 1; v < 3; v++)
      check(t_res[v] - t_res[v-1] == STEPS, $sformatf("rate: %0d cycles between results", t_res[v] - t_res[v-1]));
    check(got == NV, "all results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
