// drain_pb_entry: picks and issues the persist-buffer entry to write back.
//
// It receives drain signals from three sources: Free PBE Check (a write is
// waiting for room), Drain PB (a DrainPath is emptying the buffer) and Drain
// Threshold Check (too many Data entries). When any is raised, the Request
// Generator can take a packet and some entry is in the Data state, it picks
// the Data entry with the lowest LRU counter (least recently used), asks the
// buffer to move it from Data to Drain Issued (st_* command) and hands its
// address, metadata and data to the Request Generator, all in one clock.
// Only Data entries are drained; LRU is the replacement policy the design
// names. An entry whose count of unacknowledged write-backs is at its
// maximum (wb_full) is skipped until one is acknowledged, and so is the
// entry the Update/Read PB Entry unit overwrites in the same clock (its
// new data will be drained later). One entry per clock at most; issuing in the same clock as the
// request is this design's timing.
module drain_pb_entry
  import pcs_pkg::*;
#(
  parameter int unsigned N  = 32,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic              drain_req [3],
  input  pbe_status_e       status    [N],
  input  logic [IW-1:0]     lru       [N],
  input  logic              wb_full   [N],
  input  logic              wr_en,      // entry being written this clock
  input  logic [IW-1:0]     wr_idx,
  input  logic [ADDR_W-1:0] addr      [N],
  input  meta_t             meta      [N],
  input  logic [DATA_W-1:0] data      [N],
  // to the Request Generator
  output logic              out_valid,
  input  logic              out_ready,
  output logic [IW-1:0]     out_idx,
  output logic [ADDR_W-1:0] out_addr,
  output meta_t             out_meta,
  output logic [DATA_W-1:0] out_data,
  // status command to the PB: Data -> Drain Issued
  output logic              st_en,
  output logic [IW-1:0]     st_idx,
  output logic [3:0]        st_from,
  output pbe_status_e       st_to
);

  logic          any_req, found;
  logic [IW-1:0] vic;

  always_comb begin
    any_req = drain_req[0] || drain_req[1] || drain_req[2];
    found   = 1'b0;
    vic     = '0;
    for (int i = 0; i < N; i++) begin
      if (status[i] == PBE_DATA && !wb_full[i] && !(wr_en && wr_idx == IW'(i)) && (!found || lru[i] < lru[vic])) begin
        found = 1'b1;
        vic   = IW'(i);
      end
    end
  end

  assign out_valid = any_req && found;
  assign out_idx   = vic;
  assign out_addr  = addr[vic];
  assign out_meta  = meta[vic];
  assign out_data  = data[vic];

  assign st_en   = out_valid && out_ready;
  assign st_idx  = vic;
  assign st_from = 4'b0001 << PBE_DATA;
  assign st_to   = PBE_DRAIN_ISSUED;

endmodule
