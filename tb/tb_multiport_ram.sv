// tb_multiport_ram: self-checking test of the multi-read-port memory.
// Fills a 64 x 32 memory with a random pattern kept in a shadow array,
// then reads it back through four ports at random addresses and checks that
// a write is visible exactly from the cycle after it.
module tb_multiport_ram;
  localparam int W = 32, D = 64, NRD = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic [NRD-1:0][5:0] raddr = '0;
  logic [NRD-1:0][W-1:0] rdata;
  multiport_ram #(.WIDTH(W), .DEPTH(D), .NRD(NRD)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] shadow [D];
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
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      shadow[a] = $urandom; we = 1; waddr = 6'(a); wdata = shadow[a];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 100; t++) begin
      for (int p = 0; p < NRD; p++) raddr[p] = 6'($urandom);
      #1;
      for (int p = 0; p < NRD; p++) check(rdata[p] == shadow[raddr[p]], $sformatf("port %0d addr %0d", p, raddr[p]));
      @(negedge clk);
    end
    // write timing: old value before the edge, new value after it
    raddr[0] = 6'd7; we = 1; waddr = 6'd7; wdata = ~shadow[7]; #1;
    check(rdata[0] == shadow[7], "old data before the write edge");
    @(negedge clk); we = 0;
    check(rdata[0] == ~shadow[7], "new data after the write edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
