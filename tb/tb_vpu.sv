// tb_vpu: self-checking test of the vector unit that sums the cores'
// intermediate result lines. Random signed vectors from 4 cores are summed
// here and compared with the VPU output one cycle later, tag included.
module tb_vpu;
  localparam int NC = 4, COLS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [15:0] in_tag = '0, out_tag;
  logic [NC-1:0][COLS-1:0][31:0] in_data = '0;
  logic [COLS-1:0][31:0] out_data;
  vpu #(.NC(NC), .TAG_W(16)) dut (.*);

  int checks = 0, failures = 0;
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

  initial begin
    int expv [COLS];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      automatic int bad = 0;
      in_valid = 1; in_tag = 16'(t * 3);
      for (int j = 0; j < COLS; j++) expv[j] = 0;
      for (int c = 0; c < NC; c++) for (int j = 0; j < COLS; j++) begin
        in_data[c][j] = 32'($signed(24'($urandom)));
        expv[j] += int'($signed(in_data[c][j]));
      end
      @(negedge clk);
      check(out_valid && out_tag == 16'(t * 3), "valid and tag one cycle later");
      for (int j = 0; j < COLS; j++) if (int'($signed(out_data[j])) != expv[j]) bad++;
      check(bad == 0, $sformatf("sum %0d: %0d columns differ", t, bad));
    end
    in_valid = 0;
    @(negedge clk);
    check(!out_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
