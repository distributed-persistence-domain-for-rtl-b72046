// update_read_pb_entry: the persist buffer controller's central unit.
//
// Each clock it takes at most one packet, from the Response Buffer if that
// holds anything (acknowledgments go first so that entries become Free as
// early as possible), otherwise from the Request Buffer:
//
//   write-ack A  from downstream, for a block this switch wrote back: passed
//                to the PB (ack_*), where the entry holding A goes from Drain
//                to Free once its last write-back is acknowledged. An entry
//                overwritten meanwhile by a newer write (state Data) stays.
//                The packet is consumed.
//   write A      only when Free PBE Check allows it (fc_ok): data, metadata
//                and address are written into the entry of A, or into a Free
//                entry, the entry becomes Data and most recently used, the
//                Response Generator is asked for a write-acknowledgment to
//                the requester, and req_done tells the selector that this
//                write is no longer outstanding.
//   read A       if A is in the buffer (any non-Free state) the Response
//                Generator answers with the buffered block and the entry is
//                refreshed in the LRU order; if not, the read is handed to
//                the Response Generator to be passed on.
//   DrainPath    handed to Drain PB.
//   other        passed on unchanged.
//
// A packet that cannot proceed (generator or Drain PB busy, no room for a
// write) stays at the head of its buffer. All updates take effect at the
// clock edge that consumes the packet; the buffer lookups (lk_*) and the
// Free PBE Check result are combinational on the two buffer heads.
// Refreshing the LRU order on read hits is this design's choice.
module update_read_pb_entry
  import pcs_pkg::*;
#(
  parameter int unsigned N  = 32,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  // Response Buffer head (always a write-ack; its lookup is lk_*[0])
  input  logic              rsp_valid,
  output logic              rsp_ready,
  // Request Buffer head
  input  logic              req_valid,
  output logic              req_ready,
  input  pkt_t              req_pkt,
  // PB lookups: [0] on rsp_pkt.addr, [1] on req_pkt.addr
  input  logic              lk_hit    [2],
  input  logic [IW-1:0]     lk_idx    [2],
  input  logic [DATA_W-1:0] pb_data   [N],
  // Free PBE Check
  input  logic              fc_ok,
  input  logic              fc_coalesce,
  input  logic [IW-1:0]     fc_idx,
  // PB commands
  output logic              wr_en,
  output logic [IW-1:0]     wr_idx,
  output logic [ADDR_W-1:0] wr_addr,
  output meta_t             wr_meta,
  output logic [DATA_W-1:0] wr_data,
  output logic              ack_en,
  output logic [IW-1:0]     ack_idx,
  output logic              touch_en,
  output logic [IW-1:0]     touch_idx,
  // Response Generator
  output logic              rg_valid,
  input  logic              rg_ready,
  output rg_kind_e          rg_kind,
  output pkt_t              rg_pkt,
  output logic [DATA_W-1:0] rg_data,
  // Drain PB
  output logic              dp_valid,
  input  logic              dp_ready,
  output pkt_t              dp_pkt,
  // to the selector's Request Table
  output logic              req_done,
  output logic [ADDR_W-1:0] req_done_addr,
  // event pulses
  output logic              ev_write,
  output logic              ev_coalesce,
  output logic              ev_read_hit,
  output logic              ev_read_miss,
  output logic              ev_ack
);

  always_comb begin
    rsp_ready     = 1'b0;
    req_ready     = 1'b0;
    wr_en         = 1'b0;
    wr_idx        = fc_idx;
    wr_addr       = req_pkt.addr;
    wr_meta       = req_pkt.meta;
    wr_data       = req_pkt.data;
    ack_en        = 1'b0;
    ack_idx       = lk_idx[0];
    touch_en      = 1'b0;
    touch_idx     = fc_idx;
    rg_valid      = 1'b0;
    rg_kind       = RG_FORWARD;
    rg_pkt        = req_pkt;
    rg_data       = pb_data[lk_idx[1]];
    dp_valid      = 1'b0;
    dp_pkt        = req_pkt;
    req_done      = 1'b0;
    req_done_addr = req_pkt.addr;
    ev_write      = 1'b0;
    ev_coalesce   = 1'b0;
    ev_read_hit   = 1'b0;
    ev_read_miss  = 1'b0;
    ev_ack        = 1'b0;

    if (rsp_valid) begin
      rsp_ready = 1'b1;
      ack_en    = lk_hit[0];
      ev_ack    = 1'b1;
    end else if (req_valid) begin
      unique case (req_pkt.meta.opcode)
        OP_MEM_WR: begin
          rg_kind = RG_WR_ACK;
          if (fc_ok) begin
            rg_valid = 1'b1;
            if (rg_ready) begin
              req_ready   = 1'b1;
              wr_en       = 1'b1;
              touch_en    = 1'b1;
              req_done    = 1'b1;
              ev_write    = 1'b1;
              ev_coalesce = fc_coalesce;
            end
          end
        end
        OP_MEM_RD: begin
          rg_valid  = 1'b1;
          rg_kind   = lk_hit[1] ? RG_RD_DATA : RG_FORWARD;
          touch_idx = lk_idx[1];
          if (rg_ready) begin
            req_ready    = 1'b1;
            touch_en     = lk_hit[1];
            ev_read_hit  = lk_hit[1];
            ev_read_miss = !lk_hit[1];
          end
        end
        OP_DRAIN_PATH: begin
          dp_valid  = 1'b1;
          req_ready = dp_ready;
        end
        default: begin
          rg_valid  = 1'b1;
          req_ready = rg_ready;
        end
      endcase
    end
  end

endmodule
