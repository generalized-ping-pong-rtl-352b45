// bw_arbiter: off-chip bandwidth limiter for weight writes.
//
// Every macro lane that is writing raises req; one granted beat moves WS
// weight bytes from the weight memory into that macro. The arbiter grants at
// most `band` bytes per cycle in total: a credit counter gains `band` each
// cycle and pays WS per grant, so bandwidths below WS bytes/cycle slow each
// writer down instead of stopping it, and the fractional remainder is kept
// (capped at WS-1 so idle cycles do not bank bandwidth). Requesters are
// served round-robin starting after the last one served.
//
// `band` is a run-time input: the paper's runtime-phase study lowers the
// off-chip bandwidth from the design value (128 bytes/cycle) down to 1/64 of
// it. The credit scheme and the round-robin order are this design's choices.
// Grants are combinational from req in the same cycle.
module bw_arbiter #(
  parameter int unsigned NREQ     = gpp_pkg::N_CORES_D * gpp_pkg::N_MACROS_D,
  parameter int unsigned WS       = gpp_pkg::WRITE_SPEED,
  parameter int unsigned BAND_MAX = gpp_pkg::BAND_MAX,
  localparam int unsigned BW_W    = $clog2(BAND_MAX + 1),
  localparam int unsigned CR_W    = $clog2(BAND_MAX + WS + 1),
  localparam int unsigned IX_W    = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BW_W-1:0]   band,     // bytes per cycle
  input  logic [NREQ-1:0]   req,
  output logic [NREQ-1:0]   grant,
  output logic [CR_W-1:0]   bytes_granted
);
  logic [CR_W-1:0] credit_q, credit_d;
  logic [IX_W-1:0] ptr_q, ptr_d;

  always_comb begin
    int unsigned avail, idx, used;
    grant = '0;
    avail = int'(credit_q) + int'(band);
    used  = 0;
    ptr_d = ptr_q;
    for (int k = 0; k < int'(NREQ); k++) begin
      idx = (int'(ptr_q) + k) % NREQ;
      if (req[idx] && avail >= WS) begin
        grant[idx] = 1'b1;
        avail      = avail - WS;
        used       = used + WS;
        ptr_d      = IX_W'((idx + 1) % NREQ);
      end
    end
    bytes_granted = CR_W'(used);
    credit_d      = CR_W'((avail > WS - 1) ? WS - 1 : avail);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit_q <= '0;
      ptr_q    <= '0;
    end else begin
      credit_q <= credit_d;
      ptr_q    <= ptr_d;
    end
  end
endmodule
