// tb_sfu: self-checking test of the special function unit. Loads a bias
// table, then sends random lines with every activation, with and without
// bias, and compares with x+b, max(x+b,0) and clamp((x+b)/4 + 128, 0, 256)
// (hard sigmoid with 8 fractional bits) computed here.
module tb_sfu;
  import gpp_pkg::*;
  localparam int COLS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bias_we = 0, in_valid = 0, bias_en = 0, out_valid;
  logic [5:0] bias_waddr = '0, in_ntile = '0;
  logic [COLS-1:0][31:0] bias_wdata = '0, in_data = '0, out_data;
  logic [15:0] in_tag = '0, out_tag;
  act_e act = ACT_NONE;
  sfu #(.TAG_W(16), .BIAS_LINES(64)) dut (.*);

  int checks = 0, failures = 0;
  int bias [4][COLS];
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
    int e [COLS];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      bias_we = 1; bias_waddr = 6'(l);
      for (int j = 0; j < COLS; j++) begin
        bias[l][j] = int'($signed(12'($urandom)));
        bias_wdata[j] = 32'(bias[l][j]);
      end
      @(negedge clk);
    end
    bias_we = 0;
    for (int t = 0; t < 120; t++) begin
      automatic int bad = 0;
      automatic int v;
      in_valid = 1; in_tag = 16'(t); in_ntile = 6'(t % 4);
      bias_en = t[0]; act = act_e'(t % 3);
      for (int j = 0; j < COLS; j++) begin
        in_data[j] = 32'($signed(12'($urandom)));
        v = int'($signed(in_data[j])) + (bias_en ? bias[t % 4][j] : 0);
        case (act)
          ACT_RELU:    e[j] = (v < 0) ? 0 : v;
          ACT_SIGMOID: begin
            e[j] = (v >>> 2) + 128;
            if (e[j] < 0) e[j] = 0;
            if (e[j] > 256) e[j] = 256;
          end
          default:     e[j] = v;
        endcase
      end
      @(negedge clk);
      check(out_valid && out_tag == 16'(t), "valid and tag");
      for (int j = 0; j < COLS; j++) if (int'($signed(out_data[j])) != e[j]) bad++;
      check(bad == 0, $sformatf("line %0d act %0d bias %0d: %0d columns differ", t, act, bias_en, bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
