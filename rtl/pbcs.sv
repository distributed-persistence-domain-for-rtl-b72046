// pbcs: persist buffer controller selector (PBCS).
//
// Part of the switch's control logic. For every packet the control logic is
// about to route it is given the opcode, the address and whether the packet
// came from the PB port, and in the same clock says whether the packet must
// go to the persist buffer controller instead (to_pbc), so routing is not
// delayed. It decides from two small tables of its own:
//
//   Status Table   a copy of every PB entry's address and state, kept in
//                  step with the PB through the status changes the PBC
//                  reports (evt_*), applied at the same clock edge as in the
//                  PB, so the copy is never behind.
//   Request Table  the addresses of writes already routed to the PBC but not
//                  yet placed in the PB, with a count per address (several
//                  writes to one block may be in flight). Request Tracking
//                  adds to it when a write is routed to the PBC; the PBC's
//                  req_done removes one when the write is placed.
//
// PB Selection Logic (packets from the ordinary ports):
//   write A   to the PBC if A is in either table (so the newest version of A
//             lives in one place and older copies are overwritten in order);
//             otherwise to the PBC only if the Data entries plus outstanding
//             writes leave room for one more, else the write bypasses the PB
//             and goes on toward memory (a "write failure" of the PB).
//   read A    to the PBC if A is in the Status Table as Data or Drain Issued,
//             or in the Request Table.
//   write-ack A  to the PBC if A's entry has a write-back that has not yet
//             been acknowledged. The design's rule is "if a Drain PBE exists
//             for A"; an entry can however be overwritten (back to Data)
//             after its write-back left, and that write-back's acknowledgment
//             must still be taken by the PBC and not reach the requester. So
//             the copy also counts write-backs in flight per entry (wb):
//             +1 when the PBC reports Data -> Drain Issued, -1 when an
//             acknowledgment is routed to the PBC.
//   DrainPath to the PBC whatever its destination.
// Packets from the PB port are never redirected. When a write from the PB
// port (a drained entry) is routed, Entry Status Update moves its entry from
// Drain Issued to Drain.
//
// The capacity test "Data + outstanding >= entries" reads the design's rule
// (bypass when the total would exceed the buffer) as counting the write
// being decided. The Request Table size and count width are this design's
// choice. When a write must go to the PBC but the Request Table has no slot
// for it, stall is raised and the control logic holds the packet.
module pbcs
  import pcs_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned RT    = 8,
  parameter int unsigned CNT_W = 4,
  parameter int unsigned WBW   = 3,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW   = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // query from the control logic
  input  logic              q_valid,
  input  opcode_e           q_op,
  input  logic [ADDR_W-1:0] q_addr,
  input  logic              q_from_pb,
  output logic              to_pbc,
  output logic              stall,
  output logic              bypass,     // a write that skips the PB
  input  logic              q_fire,     // the queried packet was routed
  // PB status changes from the PBC
  input  logic              evt_valid  [3],
  input  logic [IW-1:0]     evt_idx    [3],
  input  logic [ADDR_W-1:0] evt_addr   [3],
  input  pbe_status_e       evt_status [3],
  // write placed in the PB
  input  logic              req_done,
  input  logic [ADDR_W-1:0] req_done_addr,
  // observation
  output logic [CW-1:0]     data_count
);

  localparam int unsigned RIW = (RT > 1) ? $clog2(RT) : 1;
  localparam int unsigned OW  = $clog2(RT * ((1 << CNT_W) - 1) + 1);

  logic [ADDR_W-1:0] st_addr   [N];
  pbe_status_e       st_status [N];
  logic [WBW-1:0]    st_wb     [N];
  logic              rt_valid  [RT];
  logic [ADDR_W-1:0] rt_addr   [RT];
  logic [CNT_W-1:0]  rt_cnt    [RT];

  // ---------------- lookups ----------------
  logic            st_hit, st_hit_rd, st_hit_di;
  logic [IW-1:0]   st_hit_idx;
  logic            rt_hit, rt_free_any;
  logic [RIW-1:0]  rt_hit_idx, rt_free_idx;
  logic [OW-1:0]   outstanding;

  always_comb begin
    st_hit       = 1'b0;
    st_hit_rd    = 1'b0;
    st_hit_di    = 1'b0;
    st_hit_idx   = '0;
    data_count   = '0;
    for (int i = 0; i < N; i++) begin
      if (st_status[i] != PBE_FREE && st_addr[i] == q_addr) begin
        st_hit       = 1'b1;
        st_hit_idx   = IW'(i);
        st_hit_rd    = (st_status[i] == PBE_DATA) || (st_status[i] == PBE_DRAIN_ISSUED);
        st_hit_di    = (st_status[i] == PBE_DRAIN_ISSUED);
      end
      if (st_status[i] == PBE_DATA) data_count = data_count + 1'b1;
    end
  end

  always_comb begin
    rt_hit      = 1'b0;
    rt_hit_idx  = '0;
    rt_free_any = 1'b0;
    rt_free_idx = '0;
    outstanding = '0;
    for (int j = RT - 1; j >= 0; j--) begin
      if (rt_valid[j] && rt_addr[j] == q_addr) begin
        rt_hit     = 1'b1;
        rt_hit_idx = RIW'(j);
      end
      if (!rt_valid[j]) begin
        rt_free_any = 1'b1;
        rt_free_idx = RIW'(j);
      end
      if (rt_valid[j]) outstanding = outstanding + OW'(rt_cnt[j]);
    end
  end

  // ---------------- PB Selection Logic ----------------
  logic present, room, slot, cnt_full;

  assign present  = st_hit || rt_hit;
  assign cnt_full = rt_hit && (rt_cnt[rt_hit_idx] == {CNT_W{1'b1}});
  assign slot     = (rt_hit && !cnt_full) || (!rt_hit && rt_free_any);
  assign room     = (32'(data_count) + 32'(outstanding)) < N;

  always_comb begin
    to_pbc = 1'b0;
    stall  = 1'b0;
    bypass = 1'b0;
    if (q_valid && !q_from_pb) begin
      unique case (q_op)
        OP_MEM_WR: begin
          if (present) begin
            to_pbc = 1'b1;
            stall  = !slot;
          end else if (room && slot) begin
            to_pbc = 1'b1;
          end else begin
            bypass = 1'b1;
          end
        end
        OP_MEM_RD:     to_pbc = st_hit_rd || rt_hit;
        OP_WR_ACK:     to_pbc = st_hit && st_wb[st_hit_idx] != '0;
        OP_DRAIN_PATH: to_pbc = 1'b1;
        default:       to_pbc = 1'b0;
      endcase
    end
  end

  // ---------------- Request Tracking ----------------
  logic           track;      // add one write for q_addr
  logic           done_hit;
  logic [RIW-1:0] done_idx;

  assign track = q_fire && !q_from_pb && q_op == OP_MEM_WR && to_pbc;

  always_comb begin
    done_hit = 1'b0;
    done_idx = '0;
    for (int j = 0; j < RT; j++)
      if (rt_valid[j] && rt_addr[j] == req_done_addr) begin
        done_hit = 1'b1;
        done_idx = RIW'(j);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < RT; j++) begin
        rt_valid[j] <= 1'b0;
        rt_cnt[j]   <= '0;
      end
    end else begin
      for (int j = 0; j < RT; j++) begin
        logic inc, dec;
        logic [CNT_W-1:0] c;
        inc = track && ((rt_hit && rt_hit_idx == RIW'(j)) ||
                        (!rt_hit && rt_free_idx == RIW'(j)));
        dec = req_done && done_hit && done_idx == RIW'(j);
        c   = (rt_valid[j] ? rt_cnt[j] : '0) + CNT_W'(inc) - CNT_W'(dec);
        if (inc && !rt_valid[j]) rt_addr[j] <= q_addr;
        rt_cnt[j]   <= c;
        rt_valid[j] <= (rt_valid[j] || inc) && (c != '0);
      end
    end
  end

  // ---------------- Status Table copy / Entry Status Update ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        st_status[i] <= PBE_FREE;
        st_wb[i]     <= '0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        logic up, dn;
        up = 1'b0;
        for (int k = 0; k < 3; k++)
          if (evt_valid[k] && evt_idx[k] == IW'(i) && evt_status[k] == PBE_DRAIN_ISSUED) up = 1'b1;
        dn = q_fire && !q_from_pb && q_op == OP_WR_ACK && to_pbc && st_hit_idx == IW'(i);
        st_wb[i] <= st_wb[i] + WBW'(up) - WBW'(dn);
      end
      if (q_fire && q_from_pb && q_op == OP_MEM_WR && st_hit_di)
        st_status[st_hit_idx] <= PBE_DRAIN;
      for (int k = 0; k < 3; k++)
        if (evt_valid[k]) begin
          st_status[evt_idx[k]] <= evt_status[k];
          st_addr[evt_idx[k]]   <= evt_addr[k];
        end
    end
  end

  a_done_tracked: assert property (@(posedge clk) disable iff (!rst_n) req_done |-> done_hit)
    else $error("pbcs: a placed write was never tracked");

endmodule
