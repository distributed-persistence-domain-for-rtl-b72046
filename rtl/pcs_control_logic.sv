// pcs_control_logic: routing core of the persistent CXL switch, with the
// persist buffer controller selector (PBCS) built in.
//
// The switch has NUM_PORTS ordinary ports plus the PB port (index
// NUM_PORTS), behind which sits the persist buffer controller. Every clock
// the control logic routes at most one whole packet from an input port to
// an output port:
//   * The PB port input is served first whenever its packet can move, so the
//     controller can always get its write-backs and answers out (otherwise a
//     full controller could block the very traffic that would empty it).
//   * Otherwise one ordinary input is taken in round-robin order.
//   * The output is found by looking the packet's destination port ID up in
//     a routing table (written through rt_*). In the same clock the PBCS,
//     given opcode, address and input port, may redirect the packet to the
//     PB port; a packet from the PB port itself is never redirected.
//   * A packet moves when its output is ready and the PBCS does not stall it.
//     If it cannot move, the round-robin pointer still advances so that
//     another input is tried next clock.
// This single-packet-per-clock, packet-granular routing with a directly
// indexed table is this design's simplification of a conventional switch;
// flits, virtual channels and link layers are not modelled.
module pcs_control_logic
  import pcs_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 16,
  parameter int unsigned N         = 32,
  parameter int unsigned RT        = 8,
  localparam int unsigned NP       = NUM_PORTS + 1,
  localparam int unsigned PW       = $clog2(NP),
  localparam int unsigned OPW      = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1,
  localparam int unsigned IW       = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW       = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid  [NP],
  output logic              in_ready  [NP],
  input  pkt_t              in_pkt    [NP],
  output logic              out_valid [NP],
  input  logic              out_ready [NUM_PORTS],
  output pkt_t              out_pkt   [NP],
  // room at the PB port: Request Buffer / Response Buffer (write-acks)
  input  logic              pb_req_ready,
  input  logic              pb_rsp_ready,
  // routing table write
  input  logic              rt_we,
  input  logic [ID_W-1:0]   rt_id,
  input  logic [PW-1:0]     rt_port,
  // from the persist buffer controller
  input  logic              evt_valid  [3],
  input  logic [IW-1:0]     evt_idx    [3],
  input  logic [ADDR_W-1:0] evt_addr   [3],
  input  pbe_status_e       evt_status [3],
  input  logic              req_done,
  input  logic [ADDR_W-1:0] req_done_addr,
  // observation pulses
  output logic              ev_to_pbc,
  output logic              ev_bypass,
  output logic              ev_stall,
  output logic [CW-1:0]     sel_data_count
);

  localparam int unsigned PBP = NUM_PORTS;

  logic [PW-1:0] route_tbl [1 << ID_W];

  always_ff @(posedge clk) begin
    if (rt_we) route_tbl[rt_id] <= rt_port;
  end

  // ---------------- input selection ----------------
  logic [PW-1:0] rr_ptr;
  logic [PW-1:0] pb_dest;
  logic          take_pb;
  logic          sel_valid;
  logic [PW-1:0] sel;
  pkt_t          sel_pkt;

  assign pb_dest = route_tbl[in_pkt[PBP].meta.dpid];
  assign take_pb = in_valid[PBP] && pb_dest < PW'(NUM_PORTS) && out_ready[OPW'(pb_dest)];

  // Round-robin: the first valid ordinary input at or after rr_ptr.
  logic [PW-1:0] rr_sel;
  logic          rr_any;

  always_comb begin
    rr_any = 1'b0;
    rr_sel = rr_ptr;
    for (int k = NUM_PORTS - 1; k >= 0; k--) begin
      if (in_valid[(32'(rr_ptr) + 32'(k)) % NUM_PORTS]) begin
        rr_any = 1'b1;
        rr_sel = PW'((32'(rr_ptr) + 32'(k)) % NUM_PORTS);
      end
    end
  end

  assign sel_valid = take_pb || rr_any;
  assign sel       = take_pb ? PW'(PBP) : rr_sel;
  assign sel_pkt   = in_pkt[sel];

  // ---------------- PBCS ----------------
  logic to_pbc, stall, bypass, fire;
  logic [PW-1:0] dest;

  pbcs #(.N(N), .RT(RT)) u_pbcs (
    .clk, .rst_n,
    .q_valid (sel_valid), .q_op (sel_pkt.meta.opcode), .q_addr (sel_pkt.addr),
    .q_from_pb (sel == PW'(PBP)),
    .to_pbc, .stall, .bypass, .q_fire (fire),
    .evt_valid, .evt_idx, .evt_addr, .evt_status,
    .req_done, .req_done_addr,
    .data_count (sel_data_count)
  );

  assign dest = to_pbc ? PW'(PBP) : route_tbl[sel_pkt.meta.dpid];
  logic dest_ready;

  always_comb begin
    if (dest == PW'(PBP))
      dest_ready = (sel_pkt.meta.opcode == OP_WR_ACK) ? pb_rsp_ready : pb_req_ready;
    else if (dest < PW'(NUM_PORTS))
      dest_ready = out_ready[OPW'(dest)];
    else
      dest_ready = 1'b0;
  end

  assign fire = sel_valid && !stall && dest_ready;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      out_valid[p] = sel_valid && !stall && dest == PW'(p);
      out_pkt[p]   = sel_pkt;
      in_ready[p]  = fire && sel == PW'(p);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rr_ptr <= '0;
    else if (sel_valid && sel != PW'(PBP))
      rr_ptr <= (sel == PW'(NUM_PORTS - 1)) ? '0 : sel + 1'b1;
  end

  assign ev_to_pbc = fire && to_pbc;
  assign ev_bypass = fire && bypass;
  assign ev_stall  = sel_valid && stall;

endmodule
