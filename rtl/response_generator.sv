// response_generator: builds the packets the persist buffer controller sends
// back toward a requester, or passes a missed read on.
//
//   RG_WR_ACK   the write has been persisted in the buffer: a write
//               acknowledgment with the write's address goes back to the
//               requester. This early acknowledgment is what shortens the
//               persist latency.
//   RG_RD_DATA  the read hit in the buffer: a read-data response carrying
//               the buffered block goes back to the requester.
//   RG_FORWARD  the read missed (its entry was already written back): the
//               read is passed on unchanged toward the next persistent
//               structure.
// A response goes back by swapping the port IDs: its destination is the
// request's source and its source the request's destination; tag, LD-ID and
// address are kept (this addressing is this design's choice). Results wait in
// an output buffer of DEPTH packets; an accepted input is visible at the
// output one clock later.
module response_generator
  import pcs_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  rg_kind_e          in_kind,
  input  pkt_t              in_pkt,
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_t              out_pkt
);

  pkt_t rsp;

  always_comb begin
    rsp = in_pkt;
    unique case (in_kind)
      RG_WR_ACK: begin
        rsp.meta.spid   = in_pkt.meta.dpid;
        rsp.meta.dpid   = in_pkt.meta.spid;
        rsp.meta.opcode = OP_WR_ACK;
        rsp.data        = '0;
      end
      RG_RD_DATA: begin
        rsp.meta.spid   = in_pkt.meta.dpid;
        rsp.meta.dpid   = in_pkt.meta.spid;
        rsp.meta.opcode = OP_RD_DATA;
        rsp.data        = in_data;
      end
      default: rsp = in_pkt;
    endcase
  end

  pbc_fifo #(.W($bits(pkt_t)), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid,
    .in_ready,
    .in_data  (rsp),
    .out_valid,
    .out_ready,
    .out_data (out_pkt),
    .count    ()
  );

endmodule
