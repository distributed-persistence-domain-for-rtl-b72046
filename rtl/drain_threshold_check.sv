// drain_threshold_check: drain threshold (DT) register and comparison.
//
// While the number of persist-buffer entries in the Data state is above DT,
// drain_req stays high and Drain PB Entry writes back one least-recently
// used Data entry per clock, until the count is at DT or below. DT is
// expressed in entries and kept below the number of entries.
//
// Three schemes, chosen by MODE:
//   DT_EAGER     DT = 0: every persisted block is drained at once.
//   DT_LAZY      DT = LAZY_PCT percent of the entries (75%).
//   DT_ADAPTIVE  Adaptive_CP, the design's main scheme: DT starts at INIT_PCT
//                percent (50%) and moves by C_STEP entries. The design states
//                only that DT is raised or lowered by a constant C when the
//                buffer's utilization or availability crosses a percentage P.
//                Here, at every write placed in the buffer (write_done), the
//                share of Free entries is compared with P_PCT: above P the
//                threshold rises by C_STEP (keep more blocks for reads), below
//                P it falls by C_STEP (drain sooner, a write burst is filling
//                the buffer). C_STEP and P_PCT are this design's values; the
//                design gives neither.
// DT changes one clock after write_done; drain_req is combinational.
module drain_threshold_check
  import pcs_pkg::*;
#(
  parameter int unsigned N        = 32,
  parameter dt_mode_e    MODE     = DT_ADAPTIVE,
  parameter int unsigned LAZY_PCT = 75,
  parameter int unsigned INIT_PCT = 50,
  parameter int unsigned C_STEP   = 1,
  parameter int unsigned P_PCT    = 50,
  localparam int unsigned CW      = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] data_count,  // entries in Data state
  input  logic [CW-1:0] used_count,  // entries not Free
  input  logic          write_done,  // a write was placed in the PB
  output logic [CW-1:0] dt,
  output logic          drain_req
);

  localparam int unsigned DT_MAX   = N - 1;
  localparam int unsigned DT_LAZY_V = (N * LAZY_PCT) / 100;
  localparam int unsigned DT_INIT_V = (N * INIT_PCT) / 100;

  logic [CW-1:0] dt_q;
  logic [CW-1:0] free_cnt;
  logic          low_avail, high_avail;

  // free share < P  <=>  100 * free < P * N
  assign free_cnt   = CW'(N) - used_count;
  assign low_avail  = (32'(free_cnt) * 100) < (P_PCT * N);
  assign high_avail = (32'(free_cnt) * 100) > (P_PCT * N);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      unique case (MODE)
        DT_EAGER: dt_q <= '0;
        DT_LAZY:  dt_q <= CW'(DT_LAZY_V > DT_MAX ? DT_MAX : DT_LAZY_V);
        default:  dt_q <= CW'(DT_INIT_V > DT_MAX ? DT_MAX : DT_INIT_V);
      endcase
    end else if (MODE == DT_ADAPTIVE && write_done) begin
      if (high_avail)
        dt_q <= (32'(dt_q) + C_STEP > DT_MAX) ? CW'(DT_MAX) : dt_q + CW'(C_STEP);
      else if (low_avail)
        dt_q <= (32'(dt_q) < C_STEP) ? '0 : dt_q - CW'(C_STEP);
    end
  end

  assign dt        = dt_q;
  assign drain_req = data_count > dt_q;

  a_dt_below_n: assert property (@(posedge clk) disable iff (!rst_n) 32'(dt_q) < N);

endmodule
