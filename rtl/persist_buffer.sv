// persist_buffer: the switch's persist buffer (PB).
//
// A fully associative buffer of N entries. Each entry is split over three
// tables that are read and written independently: the Data Table (64-byte
// block plus 54-bit metadata, enough to rebuild the original write packet),
// the Address Table (46-bit line address, searched associatively) and the
// Status Table (2-bit state plus an LRU counter of clog2(N) bits). Table
// contents and widths follow the design; the storage is plain flip-flops
// here, read combinationally and written on the clock edge (one access per
// clock).
//
// Writes:
//   wr_*     stores address, metadata and data in entry wr_idx and sets it
//            to Data. It has priority over any status command to the same
//            entry in the same clock.
//   ack_*    a write-back of entry ack_idx has been acknowledged by the next
//            persistent structure. Each entry counts its write-backs in
//            flight (wb_cnt, raised whenever a status command moves it to
//            Drain Issued); the entry becomes Free only when the last one is
//            acknowledged and it is still Drain Issued or Drain. If it was
//            overwritten meanwhile (Data), it stays. Counting the write-backs
//            is this design's addition: an entry can be overwritten and
//            written back again before the first write-back is acknowledged.
//   st_*[k]  conditional status updates: entry st_idx[k] goes to st_to[k]
//            only if its current state is set in st_from[k] (a one-hot mask
//            indexed by state). Ports are applied in order, later wins.
//   touch_*  makes an entry the most recently used: its counter becomes N-1
//            and every counter above its old value drops by one, so the
//            counters stay a permutation of 0..N-1 (0 = least recent). The
//            counting rule is this design's choice.
//
// Lookups: two address lookup ports report a match among non-Free entries
// (lk_hit, lk_idx, lk_status). free_any/free_idx give the lowest-index Free
// entry; data_count and used_count count Data and non-Free entries.
//
// Events: evt_* report, per write/status port, every status change applied
// this clock (entry, its address after the clock, new state), so that a
// copy of the Status Table elsewhere can follow in the same clock.
//
// Reset empties the buffer (all Free) and sets counters to 0..N-1. The
// status is volatile in the design; data surviving power loss is outside
// this model.
module persist_buffer
  import pcs_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned NST   = 2,
  parameter int unsigned WBW   = 3,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW   = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // entry write
  input  logic              wr_en,
  input  logic [IW-1:0]     wr_idx,
  input  logic [ADDR_W-1:0] wr_addr,
  input  meta_t             wr_meta,
  input  logic [DATA_W-1:0] wr_data,
  // conditional status commands
  input  logic              st_en   [NST],
  input  logic [IW-1:0]     st_idx  [NST],
  input  logic [3:0]        st_from [NST],
  input  pbe_status_e       st_to   [NST],
  // write-back acknowledged
  input  logic              ack_en,
  input  logic [IW-1:0]     ack_idx,
  // LRU refresh
  input  logic              touch_en,
  input  logic [IW-1:0]     touch_idx,
  // lookups
  input  logic [ADDR_W-1:0] lk_addr   [2],
  output logic              lk_hit    [2],
  output logic [IW-1:0]     lk_idx    [2],
  output pbe_status_e       lk_status [2],
  output logic              free_any,
  output logic [IW-1:0]     free_idx,
  output logic [CW-1:0]     data_count,
  output logic [CW-1:0]     used_count,
  // table contents
  output pbe_status_e       status_o [N],
  output logic [IW-1:0]     lru_o    [N],
  output logic              wb_full  [N],   // no further write-back may start
  output logic [ADDR_W-1:0] addr_o   [N],
  output meta_t             meta_o   [N],
  output logic [DATA_W-1:0] data_o   [N],
  // applied status changes: 0 the write port, 1 the ack port (to Free),
  // 2.. the st ports
  output logic              evt_valid  [NST+2],
  output logic [IW-1:0]     evt_idx    [NST+2],
  output logic [ADDR_W-1:0] evt_addr   [NST+2],
  output pbe_status_e       evt_status [NST+2]
);

  logic [DATA_W-1:0] data_q   [N];
  meta_t             meta_q   [N];
  logic [ADDR_W-1:0] addr_q   [N];
  pbe_status_e       status_q [N];
  logic [IW-1:0]     lru_q    [N];
  logic [WBW-1:0]    wb_q     [N];

  // ---- status next state -------------------------------------------------
  pbe_status_e status_d [N];
  logic        st_apply [NST];
  logic        ack_free;

  assign ack_free = ack_en && wb_q[ack_idx] == WBW'(1) &&
                    (status_q[ack_idx] == PBE_DRAIN_ISSUED || status_q[ack_idx] == PBE_DRAIN) &&
                    !(wr_en && wr_idx == ack_idx);

  always_comb begin
    for (int i = 0; i < N; i++) status_d[i] = status_q[i];
    if (ack_free) status_d[ack_idx] = PBE_FREE;
    for (int k = 0; k < NST; k++) begin
      st_apply[k] = st_en[k] && st_from[k][status_d[st_idx[k]]] &&
                    !(wr_en && wr_idx == st_idx[k]);
      if (st_apply[k]) status_d[st_idx[k]] = st_to[k];
    end
    if (wr_en) status_d[wr_idx] = PBE_DATA;
  end

  always_comb begin
    evt_valid[0]  = wr_en;
    evt_idx[0]    = wr_idx;
    evt_addr[0]   = wr_addr;
    evt_status[0] = PBE_DATA;
    evt_valid[1]  = ack_free;
    evt_idx[1]    = ack_idx;
    evt_addr[1]   = addr_q[ack_idx];
    evt_status[1] = PBE_FREE;
    for (int k = 0; k < NST; k++) begin
      evt_valid[k+2]  = st_apply[k];
      evt_idx[k+2]    = st_idx[k];
      evt_addr[k+2]   = addr_q[st_idx[k]];
      evt_status[k+2] = st_to[k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        status_q[i] <= PBE_FREE;
        lru_q[i]    <= IW'(i);
        wb_q[i]     <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        logic up, dn;
        status_q[i] <= status_d[i];
        up = 1'b0;
        for (int k = 0; k < NST; k++)
          if (st_apply[k] && st_idx[k] == IW'(i) && st_to[k] == PBE_DRAIN_ISSUED) up = 1'b1;
        dn = ack_en && ack_idx == IW'(i) && wb_q[i] != '0;
        wb_q[i] <= wb_q[i] + WBW'(up) - WBW'(dn);
      end
      if (touch_en) begin
        for (int i = 0; i < N; i++)
          if (lru_q[i] > lru_q[touch_idx]) lru_q[i] <= lru_q[i] - 1'b1;
        lru_q[touch_idx] <= IW'(N - 1);
      end
    end
  end

  // Data and address tables need no reset: an entry is read only when its
  // status says it holds something.
  always_ff @(posedge clk) begin
    if (wr_en) begin
      data_q[wr_idx] <= wr_data;
      meta_q[wr_idx] <= wr_meta;
      addr_q[wr_idx] <= wr_addr;
    end
  end

  // ---- lookups -----------------------------------------------------------
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      lk_hit[p]    = 1'b0;
      lk_idx[p]    = '0;
      lk_status[p] = PBE_FREE;
      for (int i = N - 1; i >= 0; i--) begin
        if (status_q[i] != PBE_FREE && addr_q[i] == lk_addr[p]) begin
          lk_hit[p]    = 1'b1;
          lk_idx[p]    = IW'(i);
          lk_status[p] = status_q[i];
        end
      end
    end
  end

  always_comb begin
    free_any   = 1'b0;
    free_idx   = '0;
    data_count = '0;
    used_count = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (status_q[i] == PBE_FREE) begin
        free_any = 1'b1;
        free_idx = IW'(i);
      end else begin
        used_count = used_count + 1'b1;
      end
      if (status_q[i] == PBE_DATA) data_count = data_count + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      status_o[i] = status_q[i];
      lru_o[i]    = lru_q[i];
      wb_full[i]  = (wb_q[i] == '1);
      addr_o[i]   = addr_q[i];
      meta_o[i]   = meta_q[i];
      data_o[i]   = data_q[i];
    end
  end

  // Two valid entries never hold the same address.
  function automatic logic dup_addr();
    dup_addr = 1'b0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if (status_q[i] != PBE_FREE && status_q[j] != PBE_FREE && addr_q[i] == addr_q[j])
          dup_addr = 1'b1;
  endfunction

  a_ack_expected: assert property (@(posedge clk) disable iff (!rst_n) ack_en |-> wb_q[ack_idx] != '0)
    else $error("persist_buffer: acknowledgment for an entry with no write-back in flight");

  a_unique_addr: assert property (@(posedge clk) disable iff (!rst_n) !dup_addr())
    else $error("persist_buffer: one address held by two entries");

endmodule
