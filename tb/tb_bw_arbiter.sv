// tb_bw_arbiter: self-checking test of the off-chip bandwidth arbiter.
// With 8 requesters of 4-byte beats it checks, for several bandwidths, that
// no cycle moves more than band bytes (rounded down to whole beats plus the
// carried remainder), that a saturated arbiter moves exactly band bytes per
// cycle on average (also for band below one beat, e.g. 2 bytes/cycle = one
// beat every 2 cycles), that only requesters are granted, and that grants
// rotate fairly.
module tb_bw_arbiter;
  localparam int NREQ = 8, WS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8:0] band;
  logic [NREQ-1:0] req, grant;
  logic [8:0] bytes_granted;

  bw_arbiter #(.NREQ(NREQ), .WS(WS), .BAND_MAX(256)) dut (.*);

  int checks = 0, failures = 0;
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

  task automatic run(input int b, input logic [NREQ-1:0] r, input int cycles);
    int total, per [NREQ], mx, mn, over;
    total = 0; over = 0;
    for (int i = 0; i < NREQ; i++) per[i] = 0;
    band = 9'(b); req = r;
    // settle one cycle so the carried credit belongs to this band
    @(negedge clk);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      if ((grant & ~req) != 0) over++;
      if ($countones(grant) * WS != int'(bytes_granted)) over++;
      if (int'(bytes_granted) > b + WS - 1) over++;
      total += int'(bytes_granted);
      for (int i = 0; i < NREQ; i++) per[i] += int'(grant[i]);
    end
    check(over == 0, $sformatf("band %0d: per-cycle limit / grant to non-requester", b));
    mx = 0; mn = 1 << 30;
    for (int i = 0; i < NREQ; i++) if (r[i]) begin
      if (per[i] > mx) mx = per[i];
      if (per[i] < mn) mn = per[i];
    end
    if ($countones(r) * WS >= b) begin
      check(total >= b * cycles - WS && total <= b * cycles + WS,
            $sformatf("band %0d: moved %0d bytes in %0d cycles", b, total, cycles));
      check(mx - mn <= 1, $sformatf("band %0d: unfair %0d..%0d", b, mn, mx));
    end else begin
      check(total == $countones(r) * WS * cycles, $sformatf("band %0d: unsaturated total %0d", b, total));
    end
  endtask

  initial begin
    band = 0; req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8,   8'hFF, 400);   // two beats per cycle
    run(16,  8'hFF, 400);
    run(12,  8'hFF, 400);
    run(2,   8'hFF, 400);   // below one beat: one beat every other cycle
    run(6,   8'hFF, 400);   // 1.5 beats per cycle
    run(256, 8'hFF, 100);   // more than all requesters need
    run(8,   8'h05, 400);   // two requesters exactly fill 8 bytes
    run(4,   8'h81, 400);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
