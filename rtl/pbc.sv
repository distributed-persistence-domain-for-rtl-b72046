// pbc: persist buffer controller (PBC) with its persist buffer (PB).
//
// The PBC sits behind an extra switch port, the PB port. Packets the switch
// routes there (writes and reads for blocks the switch holds or will hold,
// DrainPath requests, and acknowledgments for blocks it wrote back) enter
// through in_*; packets the PBC produces (early write acknowledgments, read
// data, passed-on reads, write-backs of drained entries, DrainPath) leave
// through out_* back into the switch.
//
// Inside, following the controller's block diagram:
//   in_* --> Request Buffer  (everything but acknowledgments) --+
//        \-> Response Buffer (write acknowledgments) -----------+--> Update/Read PB Entry
//   Free PBE Check gates writes at the Request Buffer head.
//   Update/Read PB Entry writes the PB, frees acknowledged entries, answers
//   reads, and hands DrainPath to Drain PB.
//   Drain PB Entry writes back the LRU Data entry when Free PBE Check, Drain
//   PB or Drain Threshold Check asks; Request Generator rebuilds the write.
//   Response Generator and Request Generator outputs share the PB port,
//   taken in turn (round-robin, this design's choice).
// When a drain write leaves the PB port its entry goes from Drain Issued to
// Drain; the selector in the switch makes the same change in its copy in the
// same clock.
//
// To the selector (pbcs) go, every clock, the status changes the PB applied
// (evt_*: entry writes, frees and Data -> Drain Issued) and req_done when a
// write that was routed here has been placed. Event pulses ev_* count what
// happened. Buffer depths are this design's choice.
module pbc
  import pcs_pkg::*;
#(
  parameter int unsigned N         = 32,
  parameter int unsigned REQ_DEPTH = 8,
  parameter int unsigned RSP_DEPTH = 8,
  parameter int unsigned GEN_DEPTH = 4,
  parameter dt_mode_e    DT_MODE   = DT_ADAPTIVE,
  parameter int unsigned C_STEP    = 1,
  parameter int unsigned P_PCT     = 50,
  localparam int unsigned IW       = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW       = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the switch (PB port output)
  // in_ready_req: Request Buffer has room (any packet but a write-ack);
  // in_ready_rsp: Response Buffer has room (write-acks). Both are
  // independent of in_pkt, so the switch may pick a packet knowing them.
  input  logic              in_valid,
  output logic              in_ready_req,
  output logic              in_ready_rsp,
  input  pkt_t              in_pkt,
  // to the switch (PB port input)
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_t              out_pkt,
  // status changes for the selector's Status Table copy
  output logic              evt_valid  [3],
  output logic [IW-1:0]     evt_idx    [3],
  output logic [ADDR_W-1:0] evt_addr   [3],
  output pbe_status_e       evt_status [3],
  // a routed write has been placed: Request Table decrement
  output logic              req_done,
  output logic [ADDR_W-1:0] req_done_addr,
  // observation
  output logic [CW-1:0]     data_count,
  output logic [CW-1:0]     dt,
  output logic              ev_write,
  output logic              ev_coalesce,
  output logic              ev_read_hit,
  output logic              ev_read_miss,
  output logic              ev_ack,
  output logic              ev_drain,
  output logic              ev_drain_path
);

  // ---------------- input buffers ----------------
  logic is_ack;
  logic reqb_valid, reqb_ready, rspb_valid, rspb_ready;
  pkt_t reqb_pkt, rspb_pkt;

  assign is_ack = (in_pkt.meta.opcode == OP_WR_ACK);

  pbc_fifo #(.W($bits(pkt_t)), .DEPTH(REQ_DEPTH)) u_request_buffer (
    .clk, .rst_n,
    .in_valid (in_valid && !is_ack), .in_ready (in_ready_req), .in_data (in_pkt),
    .out_valid (reqb_valid), .out_ready (reqb_ready), .out_data (reqb_pkt),
    .count ()
  );

  pbc_fifo #(.W($bits(pkt_t)), .DEPTH(RSP_DEPTH)) u_response_buffer (
    .clk, .rst_n,
    .in_valid (in_valid && is_ack), .in_ready (in_ready_rsp), .in_data (in_pkt),
    .out_valid (rspb_valid), .out_ready (rspb_ready), .out_data (rspb_pkt),
    .count ()
  );

  // ---------------- persist buffer ----------------
  logic              wr_en;
  logic [IW-1:0]     wr_idx;
  logic [ADDR_W-1:0] wr_addr;
  meta_t             wr_meta;
  logic [DATA_W-1:0] wr_data;
  logic              st_en   [2];
  logic [IW-1:0]     st_idx  [2];
  logic [3:0]        st_from [2];
  pbe_status_e       st_to   [2];
  logic              ack_en;
  logic [IW-1:0]     ack_idx;
  logic              pb_wb_full [N];
  logic              touch_en;
  logic [IW-1:0]     touch_idx;
  logic [ADDR_W-1:0] lk_addr [2];
  logic              lk_hit  [2];
  logic [IW-1:0]     lk_idx  [2];
  pbe_status_e       lk_status [2];
  logic              free_any;
  logic [IW-1:0]     free_idx;
  logic [CW-1:0]     used_count;
  pbe_status_e       pb_status [N];
  logic [IW-1:0]     pb_lru    [N];
  logic [ADDR_W-1:0] pb_addr   [N];
  meta_t             pb_meta   [N];
  logic [DATA_W-1:0] pb_data   [N];
  logic              pe_valid  [4];
  logic [IW-1:0]     pe_idx    [4];
  logic [ADDR_W-1:0] pe_addr   [4];
  pbe_status_e       pe_status [4];
  logic [3:0]        unused_lk_status;

  assign unused_lk_status = {lk_status[0], lk_status[1]};

  assign lk_addr[0] = rspb_pkt.addr;
  assign lk_addr[1] = reqb_pkt.addr;

  persist_buffer #(.N(N), .NST(2)) u_pb (
    .clk, .rst_n,
    .wr_en, .wr_idx, .wr_addr, .wr_meta, .wr_data,
    .st_en, .st_idx, .st_from, .st_to,
    .ack_en, .ack_idx,
    .touch_en, .touch_idx,
    .lk_addr, .lk_hit, .lk_idx, .lk_status,
    .free_any, .free_idx, .data_count, .used_count,
    .status_o (pb_status), .lru_o (pb_lru), .wb_full (pb_wb_full), .addr_o (pb_addr),
    .meta_o (pb_meta), .data_o (pb_data),
    .evt_valid (pe_valid), .evt_idx (pe_idx), .evt_addr (pe_addr), .evt_status (pe_status)
  );

  // Entry write, free on acknowledgment and Data -> Drain Issued go to the
  // selector; Drain Issued -> Drain (event 3) is made there on its own.
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      evt_valid[k]  = pe_valid[k];
      evt_idx[k]    = pe_idx[k];
      evt_addr[k]   = pe_addr[k];
      evt_status[k] = pe_status[k];
    end
  end

  // ---------------- Free PBE Check ----------------
  logic          is_wr_head, fc_ok, fc_coalesce, fc_drain;
  logic [IW-1:0] fc_idx;

  assign is_wr_head = reqb_valid && (reqb_pkt.meta.opcode == OP_MEM_WR) && !rspb_valid;

  free_pbe_check #(.N(N)) u_free_pbe_check (
    .is_write (is_wr_head), .hit (lk_hit[1]), .hit_idx (lk_idx[1]),
    .free_any, .free_idx,
    .ok (fc_ok), .coalesce (fc_coalesce), .alloc_idx (fc_idx), .drain_req (fc_drain)
  );

  // ---------------- Update/Read PB Entry ----------------
  logic              rg_valid, rg_ready;
  rg_kind_e          rg_kind;
  pkt_t              rg_pkt;
  logic [DATA_W-1:0] rg_data;
  logic              dp_in_valid, dp_in_ready;
  pkt_t              dp_in_pkt;

  update_read_pb_entry #(.N(N)) u_update_read (
    .rsp_valid (rspb_valid), .rsp_ready (rspb_ready),
    .req_valid (reqb_valid), .req_ready (reqb_ready), .req_pkt (reqb_pkt),
    .lk_hit, .lk_idx, .pb_data,
    .fc_ok, .fc_coalesce, .fc_idx,
    .wr_en, .wr_idx, .wr_addr, .wr_meta, .wr_data,
    .ack_en, .ack_idx,
    .touch_en, .touch_idx,
    .rg_valid, .rg_ready, .rg_kind, .rg_pkt, .rg_data,
    .dp_valid (dp_in_valid), .dp_ready (dp_in_ready), .dp_pkt (dp_in_pkt),
    .req_done, .req_done_addr,
    .ev_write, .ev_coalesce, .ev_read_hit, .ev_read_miss, .ev_ack
  );

  // ---------------- Drain PB ----------------
  logic dp_out_valid, dp_out_ready, dp_drain;
  pkt_t dp_out_pkt;

  drain_pb #(.N(N)) u_drain_pb (
    .clk, .rst_n,
    .in_valid (dp_in_valid), .in_ready (dp_in_ready), .in_pkt (dp_in_pkt),
    .data_count, .drain_req (dp_drain),
    .out_valid (dp_out_valid), .out_ready (dp_out_ready), .out_pkt (dp_out_pkt)
  );

  // ---------------- Drain Threshold Check ----------------
  logic dt_drain;

  drain_threshold_check #(.N(N), .MODE(DT_MODE), .C_STEP(C_STEP), .P_PCT(P_PCT)) u_dt_check (
    .clk, .rst_n, .data_count, .used_count, .write_done (ev_write),
    .dt, .drain_req (dt_drain)
  );

  // ---------------- Drain PB Entry ----------------
  logic              drn_valid, drn_ready;
  logic [IW-1:0]     drn_idx;
  logic [ADDR_W-1:0] drn_addr;
  meta_t             drn_meta;
  logic [DATA_W-1:0] drn_data;
  logic              drain_sig [3];

  assign drain_sig[0] = fc_drain;
  assign drain_sig[1] = dp_drain;
  assign drain_sig[2] = dt_drain;

  drain_pb_entry #(.N(N)) u_drain_pb_entry (
    .drain_req (drain_sig), .status (pb_status), .lru (pb_lru), .wb_full (pb_wb_full),
    .wr_en, .wr_idx,
    .addr (pb_addr), .meta (pb_meta), .data (pb_data),
    .out_valid (drn_valid), .out_ready (drn_ready), .out_idx (drn_idx),
    .out_addr (drn_addr), .out_meta (drn_meta), .out_data (drn_data),
    .st_en (st_en[0]), .st_idx (st_idx[0]), .st_from (st_from[0]), .st_to (st_to[0])
  );

  assign ev_drain      = drn_valid && drn_ready;
  assign ev_drain_path = dp_out_valid && dp_out_ready;

  // ---------------- generators ----------------
  logic          qg_valid, qg_ready, qg_is_drain;
  pkt_t          qg_pkt;
  logic [IW-1:0] qg_idx;
  logic          sg_valid, sg_ready;
  pkt_t          sg_pkt;

  request_generator #(.N(N), .DEPTH(GEN_DEPTH)) u_request_generator (
    .clk, .rst_n,
    .drn_valid, .drn_ready, .drn_idx, .drn_addr, .drn_meta, .drn_data,
    .dp_valid (dp_out_valid), .dp_ready (dp_out_ready), .dp_pkt (dp_out_pkt),
    .out_valid (qg_valid), .out_ready (qg_ready), .out_pkt (qg_pkt),
    .out_is_drain (qg_is_drain), .out_idx (qg_idx)
  );

  response_generator #(.DEPTH(GEN_DEPTH)) u_response_generator (
    .clk, .rst_n,
    .in_valid (rg_valid), .in_ready (rg_ready), .in_kind (rg_kind),
    .in_pkt (rg_pkt), .in_data (rg_data),
    .out_valid (sg_valid), .out_ready (sg_ready), .out_pkt (sg_pkt)
  );

  // ---------------- PB port output mux ----------------
  logic last_req;   // the request side went last
  logic pick_req;

  assign pick_req  = qg_valid && (!sg_valid || !last_req);
  assign out_valid = qg_valid || sg_valid;
  assign out_pkt   = pick_req ? qg_pkt : sg_pkt;
  assign qg_ready  = pick_req && out_ready;
  assign sg_ready  = !pick_req && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n)                 last_req <= 1'b0;
    else if (out_valid && out_ready) last_req <= pick_req;
  end

  a_rsp_is_ack: assert property (@(posedge clk) disable iff (!rst_n)
                                 rspb_valid |-> rspb_pkt.meta.opcode == OP_WR_ACK)
    else $error("pbc: Response Buffer holds a packet that is not a write-ack");

  // A drain write leaving the port: Drain Issued -> Drain.
  assign st_en[1]   = qg_valid && qg_ready && qg_is_drain;
  assign st_idx[1]  = qg_idx;
  assign st_from[1] = 4'b0001 << PBE_DRAIN_ISSUED;
  assign st_to[1]   = PBE_DRAIN;

endmodule
