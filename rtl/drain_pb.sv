// drain_pb: holds a DrainPath request until the persist buffer has no Data
// entry left, then lets it continue downstream.
//
// A DrainPath is sent by the operating system (through the root complex)
// before a process migrates, or after a crash, so that every block held in
// the switches along a path reaches the memory node before the memory node
// answers. This unit takes one DrainPath from the Update/Read PB Entry
// unit, keeps drain_req high while data_count is non-zero (Drain PB Entry
// then writes back one Data entry per clock) and, once no Data entry
// remains, offers the packet unchanged to the Request Generator. The drain
// writes leave through the same generator queue ahead of it, so the
// DrainPath cannot overtake them. One DrainPath is held at a time (a second
// one waits upstream): this is this design's choice. The packet is offered
// the clock after data_count is seen at zero.
module drain_pb
  import pcs_pkg::*;
#(
  parameter int unsigned N  = 32,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  pkt_t          in_pkt,
  input  logic [CW-1:0] data_count,
  output logic          drain_req,
  output logic          out_valid,
  input  logic          out_ready,
  output pkt_t          out_pkt
);

  typedef enum logic [1:0] {IDLE, DRAINING, FORWARD} state_e;
  state_e state;
  pkt_t   held;

  assign in_ready  = (state == IDLE);
  assign drain_req = (state == DRAINING) && (data_count != '0);
  assign out_valid = (state == FORWARD);
  assign out_pkt   = held;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
    end else begin
      unique case (state)
        IDLE:     if (in_valid) state <= DRAINING;
        DRAINING: if (data_count == '0) state <= FORWARD;
        FORWARD:  if (out_ready) state <= IDLE;
        default:  state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == IDLE && in_valid) held <= in_pkt;
  end

endmodule
