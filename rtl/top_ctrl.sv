// top_ctrl: top controller of the accelerator.
//
// Runs the tile instructions in the tile instruction memory from entry 0
// until an OP_END. For each OP_GEMM it
//   1. PREP : copies the n_in*k_tiles input lines from the global input
//             memory (in_base ..) into every core's input buffer, and clears
//             the n_in*n_tiles result lines of every core, one line a cycle;
//   2. GEN  : starts the instruction generation unit and waits for it;
//   3. RUN  : starts all cores with the strategy, active-macro count and
//             write-slot count of the instruction, and waits for all of them;
//             run_cycles counts the cycles of this phase;
//   4. DRAIN: reads every result line from all cores, one line a cycle, into
//             the VPU (sum over cores) and the SFU; the SFU output is written
//             to the global result memory at out_base + line;
//   5. waits two cycles for the VPU/SFU pipeline and fetches the next entry.
// `done` is high while idle; `start` begins at entry 0.
//
// The paper shows a top controller beside the memories, the instruction
// generation unit and the SFU; this sequence is this design's choice.
module top_ctrl
  import gpp_pkg::*;
#(
  parameter int unsigned TI_DEPTH = 64,
  localparam int unsigned TI_AW   = $clog2(TI_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  // tile instruction memory
  output logic [TI_AW-1:0]   ti_raddr,
  input  tile_instr_t        ti_rdata,
  output tile_instr_t        cur,         // instruction being executed
  // input memory -> core input buffers
  output logic [11:0]        im_raddr,
  output logic               in_we,
  output logic [11:0]        in_waddr,
  // core result buffers
  output logic               clr_en,
  output logic [11:0]        clr_line,
  output logic [11:0]        rd_line,
  // instruction generation unit
  output logic               ig_start,
  input  logic               ig_done,
  // cores
  output logic               core_start,
  input  logic               cores_done,
  // drain into VPU -> SFU -> result memory
  output logic               drain_valid,
  output logic [11:0]        drain_addr,   // result-memory line
  output logic [7:0]         drain_ntile,
  // statistics
  output logic [31:0]        run_cycles,
  output logic [15:0]        gemm_count
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_PREP, S_GEN, S_GENW, S_RUN, S_RUNW, S_DRAIN, S_FLUSH
  } state_e;

  state_e      st_q;
  logic [TI_AW-1:0] pc_q;
  logic [15:0] c_q;
  logic [7:0]  v_q, nt_q;
  logic [1:0]  fl_q;
  logic [15:0] in_lines, res_lines, prep_lines;

  assign done       = (st_q == S_IDLE);
  assign ti_raddr   = pc_q;
  assign in_lines   = 16'(cur.n_in) * 16'(cur.k_tiles);
  assign res_lines  = 16'(cur.n_in) * 16'(cur.n_tiles);
  assign prep_lines = (in_lines > res_lines) ? in_lines : res_lines;

  assign im_raddr   = cur.in_base + 12'(c_q);
  assign in_we      = (st_q == S_PREP) && (c_q < in_lines);
  assign in_waddr   = 12'(c_q);
  assign clr_en     = (st_q == S_PREP) && (c_q < res_lines);
  assign clr_line   = 12'(c_q);
  assign ig_start   = (st_q == S_GEN);
  assign core_start = (st_q == S_RUN);
  assign rd_line     = 12'(16'(nt_q) * 16'(cur.n_in) + 16'(v_q));
  assign drain_valid = (st_q == S_DRAIN);
  assign drain_addr  = cur.out_base + rd_line;
  assign drain_ntile = nt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      pc_q       <= '0;
      c_q        <= '0;
      v_q        <= '0;
      nt_q       <= '0;
      fl_q       <= '0;
      cur        <= '0;
      run_cycles <= '0;
      gemm_count <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (start) begin
          pc_q <= '0;
          st_q <= S_FETCH;
        end
        S_FETCH: begin
          cur <= ti_rdata;
          c_q <= '0;
          st_q <= (ti_rdata.op == OP_GEMM) ? S_PREP : S_IDLE;
        end
        S_PREP: begin
          c_q <= c_q + 1'b1;
          if (c_q + 1 >= prep_lines) st_q <= S_GEN;
        end
        S_GEN:  st_q <= S_GENW;
        S_GENW: if (ig_done) st_q <= S_RUN;
        S_RUN: begin
          run_cycles <= 32'd1;
          st_q       <= S_RUNW;
        end
        S_RUNW: begin
          if (cores_done) begin
            v_q  <= '0;
            nt_q <= '0;
            st_q <= (res_lines == 0) ? S_FLUSH : S_DRAIN;
          end else begin
            run_cycles <= run_cycles + 1'b1;
          end
        end
        S_DRAIN: begin
          if (v_q == cur.n_in - 1) begin
            v_q <= '0;
            nt_q <= nt_q + 1'b1;
            if (nt_q == cur.n_tiles - 1) st_q <= S_FLUSH;
          end else begin
            v_q <= v_q + 1'b1;
          end
          fl_q <= '0;
        end
        S_FLUSH: begin
          fl_q <= fl_q + 1'b1;
          if (fl_q == 2'd2) begin
            gemm_count <= gemm_count + 1'b1;
            pc_q <= pc_q + 1'b1;
            st_q <= S_FETCH;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
