// tb_result_buffer: self-checking test of a core's intermediate result
// buffer. Clears 16 lines, accumulates random signed vectors into random
// lines many times while keeping a reference sum here, and compares every
// line through the read port; also checks that clearing zeroes a line.
module tb_result_buffer;
  localparam int LINES = 16, COLS = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en = 0, clr_en = 0;
  logic [3:0] acc_line = '0, clr_line = '0, rd_line = '0;
  logic [COLS-1:0][31:0] acc_data = '0, rd_data;
  result_buffer #(.LINES(LINES)) dut (.*);

  int checks = 0, failures = 0;
  int ref_m [LINES][COLS];
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk); clr_en = 1; clr_line = 4'(l);
      for (int c = 0; c < COLS; c++) ref_m[l][c] = 0;
    end
    @(negedge clk); clr_en = 0;
    for (int t = 0; t < 200; t++) begin
      acc_en = 1; acc_line = 4'($urandom);
      for (int c = 0; c < COLS; c++) begin
        acc_data[c] = 32'($signed(20'($urandom)));
        ref_m[acc_line][c] += int'($signed(acc_data[c]));
      end
      @(negedge clk);
    end
    acc_en = 0;
    for (int l = 0; l < LINES; l++) begin
      automatic int bad = 0;
      rd_line = 4'(l); #1;
      for (int c = 0; c < COLS; c++) if (int'($signed(rd_data[c])) != ref_m[l][c]) bad++;
      check(bad == 0, $sformatf("line %0d: %0d columns differ", l, bad));
    end
    @(negedge clk); clr_en = 1; clr_line = 4'd3; @(negedge clk); clr_en = 0;
    rd_line = 4'd3; #1;
    check(rd_data == '0, "cleared line reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
