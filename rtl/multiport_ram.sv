// multiport_ram: a memory array with one synchronous write port and NRD
// combinational read ports.
//
// Used for every plain memory of the accelerator: the global weight, input
// and result memories, the tile and core instruction memories and the
// per-core input buffer. A read port returns mem[raddr] in the same cycle;
// a write becomes visible the cycle after we is sampled. The memory is not
// reset. The paper gives these memories by name only; their depth, width and
// number of ports are this design's choices and are set where they are used.
module multiport_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NRD   = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [WIDTH-1:0]            wdata,
  input  logic [NRD-1:0][AW-1:0]      raddr,
  output logic [NRD-1:0][WIDTH-1:0]   rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int p = 0; p < int'(NRD); p++) rdata[p] = mem[raddr[p]];
  end
endmodule
