// pcs: persistent CXL switch (top level).
//
// A CXL switch that is itself part of the persistence domain. A write that
// reaches it can be persisted in the switch's persist buffer (PB) and
// acknowledged at once, so the requester's persist barrier does not wait
// for the trip to the memory node; the buffered block is later written back
// on the path to memory. Reads of buffered blocks are answered by the
// switch, and repeated writes to a buffered block are merged in it.
// Correctness (a read always sees the newest version; no older version ever
// overwrites a newer one downstream) comes from routing every request for a
// buffered or in-flight block to the buffer, and from keeping an entry until
// the next persistent structure acknowledges its write-back.
//
// Structure:
//   pcs_control_logic  routes one packet per clock between NUM_PORTS ports
//                      and the internal PB port; contains the selector
//                      (pbcs) that decides what goes to the PB port.
//   pbc                the persist buffer controller with the persist
//                      buffer, behind the PB port.
// Ports are packet-wide valid/ready channels (one pcs_pkg::pkt_t per
// transfer); the routing table maps a 12-bit destination port ID to an
// output port and must be written through rt_* before traffic. stats counts
// the events of pcs_stats_t since reset. Parameters default to the values
// of the design's main configuration: 16 ports, 32 PB entries, adaptive
// drain threshold; buffer depths and the Request Table size are this
// design's choice. Reset (rst_n) is synchronous and active low throughout,
// also this design's choice.
module pcs
  import pcs_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 16,
  parameter int unsigned PB_ENTRIES = 32,
  parameter int unsigned RT_ENTRIES = 8,
  parameter int unsigned REQ_DEPTH  = 8,
  parameter int unsigned RSP_DEPTH  = 8,
  parameter int unsigned GEN_DEPTH  = 4,
  parameter dt_mode_e    DT_MODE    = DT_ADAPTIVE,
  parameter int unsigned C_STEP     = 1,
  parameter int unsigned P_PCT      = 50,
  localparam int unsigned PW        = $clog2(NUM_PORTS + 1),
  localparam int unsigned CW        = $clog2(PB_ENTRIES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid  [NUM_PORTS],
  output logic              in_ready  [NUM_PORTS],
  input  pkt_t              in_pkt    [NUM_PORTS],
  output logic              out_valid [NUM_PORTS],
  input  logic              out_ready [NUM_PORTS],
  output pkt_t              out_pkt   [NUM_PORTS],
  input  logic              rt_we,
  input  logic [ID_W-1:0]   rt_id,
  input  logic [PW-1:0]     rt_port,
  output pcs_stats_t        stats,
  output logic [CW-1:0]     pb_data_count,
  output logic [CW-1:0]     drain_threshold
);

  localparam int unsigned NP = NUM_PORTS + 1;
  localparam int unsigned IW = (PB_ENTRIES > 1) ? $clog2(PB_ENTRIES) : 1;

  logic cl_in_valid  [NP];
  logic cl_in_ready  [NP];
  pkt_t cl_in_pkt    [NP];
  logic cl_out_valid [NP];
  logic cl_out_ready [NUM_PORTS];
  pkt_t cl_out_pkt   [NP];

  logic pbc_out_valid, pbc_out_ready;
  pkt_t pbc_out_pkt;
  logic pbc_ready_req, pbc_ready_rsp;

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      cl_in_valid[p]  = in_valid[p];
      cl_in_pkt[p]    = in_pkt[p];
      in_ready[p]     = cl_in_ready[p];
      out_valid[p]    = cl_out_valid[p];
      out_pkt[p]      = cl_out_pkt[p];
      cl_out_ready[p] = out_ready[p];
    end
    cl_in_valid[NUM_PORTS]  = pbc_out_valid;
    cl_in_pkt[NUM_PORTS]    = pbc_out_pkt;
    pbc_out_ready           = cl_in_ready[NUM_PORTS];
  end

  logic              evt_valid  [3];
  logic [IW-1:0]     evt_idx    [3];
  logic [ADDR_W-1:0] evt_addr   [3];
  pbe_status_e       evt_status [3];
  logic              req_done;
  logic [ADDR_W-1:0] req_done_addr;
  logic              ev_to_pbc, ev_bypass, ev_stall;
  logic [CW-1:0]     sel_data_count;
  logic              ev_write, ev_coalesce, ev_read_hit, ev_read_miss, ev_ack;
  logic              ev_drain, ev_drain_path;

  pcs_control_logic #(.NUM_PORTS(NUM_PORTS), .N(PB_ENTRIES), .RT(RT_ENTRIES)) u_control (
    .clk, .rst_n,
    .in_valid (cl_in_valid), .in_ready (cl_in_ready), .in_pkt (cl_in_pkt),
    .out_valid (cl_out_valid), .out_ready (cl_out_ready), .out_pkt (cl_out_pkt),
    .pb_req_ready (pbc_ready_req), .pb_rsp_ready (pbc_ready_rsp),
    .rt_we, .rt_id, .rt_port,
    .evt_valid, .evt_idx, .evt_addr, .evt_status,
    .req_done, .req_done_addr,
    .ev_to_pbc, .ev_bypass, .ev_stall, .sel_data_count
  );

  pbc #(.N(PB_ENTRIES), .REQ_DEPTH(REQ_DEPTH), .RSP_DEPTH(RSP_DEPTH),
        .GEN_DEPTH(GEN_DEPTH), .DT_MODE(DT_MODE), .C_STEP(C_STEP), .P_PCT(P_PCT)) u_pbc (
    .clk, .rst_n,
    .in_valid (cl_out_valid[NUM_PORTS]), .in_ready_req (pbc_ready_req), .in_ready_rsp (pbc_ready_rsp), .in_pkt (cl_out_pkt[NUM_PORTS]),
    .out_valid (pbc_out_valid), .out_ready (pbc_out_ready), .out_pkt (pbc_out_pkt),
    .evt_valid, .evt_idx, .evt_addr, .evt_status,
    .req_done, .req_done_addr,
    .data_count (pb_data_count), .dt (drain_threshold),
    .ev_write, .ev_coalesce, .ev_read_hit, .ev_read_miss, .ev_ack,
    .ev_drain, .ev_drain_path
  );

  // The selector's copy of the Status Table must agree with the PB.
  a_copy_in_step: assert property (@(posedge clk) disable iff (!rst_n) sel_data_count == pb_data_count)
    else $error("pcs: selector Status Table copy disagrees with the PB");

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      stats.wr_to_pbc    <= stats.wr_to_pbc    + 32'(ev_to_pbc && cl_out_pkt[NUM_PORTS].meta.opcode == OP_MEM_WR);
      stats.wr_bypass    <= stats.wr_bypass    + 32'(ev_bypass);
      stats.wr_persisted <= stats.wr_persisted + 32'(ev_write);
      stats.wr_coalesced <= stats.wr_coalesced + 32'(ev_coalesce);
      stats.rd_hit       <= stats.rd_hit       + 32'(ev_read_hit);
      stats.rd_miss      <= stats.rd_miss      + 32'(ev_read_miss);
      stats.ack_in       <= stats.ack_in       + 32'(ev_ack);
      stats.drains       <= stats.drains       + 32'(ev_drain);
      stats.drain_paths  <= stats.drain_paths  + 32'(ev_drain_path);
      stats.stalls       <= stats.stalls       + 32'(ev_stall);
    end
  end

endmodule
