// request_generator: builds the packets the persist buffer controller sends
// on toward memory.
//
// Two inputs. A drained entry (from Drain PB Entry) is turned back into the
// write request it came from: the stored metadata (source and destination
// port IDs, LD-ID, tag) with the write opcode, the stored address and data.
// A DrainPath (from Drain PB) is passed on unchanged. Results wait in an
// output buffer of DEPTH packets ahead of the PB port. Each output packet
// carries a flag saying it is a drain write and the index of the entry it
// came from, so the controller can mark that entry Drain when the packet
// leaves the port. When both inputs are offered in one clock the drain write
// goes first, so a DrainPath never passes a drain write (this design's
// arbitration). An accepted packet is visible at the output one clock later.
module request_generator
  import pcs_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // drained entry
  input  logic              drn_valid,
  output logic              drn_ready,
  input  logic [IW-1:0]     drn_idx,
  input  logic [ADDR_W-1:0] drn_addr,
  input  meta_t             drn_meta,
  input  logic [DATA_W-1:0] drn_data,
  // DrainPath
  input  logic              dp_valid,
  output logic              dp_ready,
  input  pkt_t              dp_pkt,
  // to the PB port
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_t              out_pkt,
  output logic              out_is_drain,
  output logic [IW-1:0]     out_idx
);

  typedef struct packed {
    pkt_t          pkt;
    logic          is_drain;
    logic [IW-1:0] idx;
  } item_t;

  item_t in_item, out_item;
  logic  q_ready;

  always_comb begin
    in_item = '0;
    if (drn_valid) begin
      in_item.pkt.meta        = drn_meta;
      in_item.pkt.meta.opcode = OP_MEM_WR;
      in_item.pkt.addr        = drn_addr;
      in_item.pkt.data        = drn_data;
      in_item.is_drain        = 1'b1;
      in_item.idx             = drn_idx;
    end else begin
      in_item.pkt = dp_pkt;
    end
  end

  assign drn_ready = q_ready;
  assign dp_ready  = q_ready && !drn_valid;

  pbc_fifo #(.W($bits(item_t)), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (drn_valid || dp_valid),
    .in_ready (q_ready),
    .in_data  (in_item),
    .out_valid,
    .out_ready,
    .out_data (out_item),
    .count    ()
  );

  assign out_pkt      = out_item.pkt;
  assign out_is_drain = out_item.is_drain;
  assign out_idx      = out_item.idx;

endmodule
