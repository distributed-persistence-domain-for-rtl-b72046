// Testbench for pbcs (the PB Controller Selector) at N=8, RT=4 with 2-bit
// Request Table counters. The TB keeps its own copy of the persist buffer
// state (status, address, write-backs in flight per entry) and of the
// writes routed to the PBC but not yet placed, drives legal status-change
// events, placements and random queries, and checks each routing decision:
//   write  -> PBC if its line is in the PB or already on its way there
//             (stall if its tracking counter is saturated); else PBC if the
//             Data entries plus the writes on their way leave room and a
//             tracking slot is free; else bypass to memory;
//   read   -> PBC if the line is in Data or Drain Issued, or on its way;
//   ack    -> PBC only while the entry has a write-back in flight;
//   DrainPath -> PBC; anything from the PB port itself -> never redirected.
// It also checks the Data count the selector derives from its copy.
module tb_pbcs;
  import pcs_pkg::*;
  localparam int N = 8, RT = 4, CNT_W = 2, CMAX = 3, NA = 14;
  logic clk = 1'b0, rst_n = 1'b0;
  logic q_valid, q_from_pb, to_pbc, stall, bypass, q_fire;
  opcode_e q_op;
  logic [ADDR_W-1:0] q_addr;
  logic evt_valid [3]; logic [2:0] evt_idx [3]; logic [ADDR_W-1:0] evt_addr [3];
  pbe_status_e evt_status [3];
  logic req_done; logic [ADDR_W-1:0] req_done_addr;
  logic [3:0] data_count;
  int checks = 0, failures = 0;

  pbe_status_e m_st [N]; logic [ADDR_W-1:0] m_addr [N]; int m_wb [N];
  int rt [logic [ADDR_W-1:0]];
  int n_ack_idle = 0;
  int n_pbc = 0, n_byp = 0, n_stall = 0, n_ack_pbc = 0, n_ack_host = 0, n_rd_pbc = 0;

  pbcs #(.N(N), .RT(RT), .CNT_W(CNT_W), .WBW(3)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] pa(int i);
    return ADDR_W'(64 * i + 64);
  endfunction

  function automatic int find(logic [ADDR_W-1:0] a);
    for (int i = 0; i < N; i++) if (m_st[i] != PBE_FREE && m_addr[i] == a) return i;
    return -1;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin m_st[i] = PBE_FREE; m_wb[i] = 0; end
    q_valid = 0; q_from_pb = 0; q_fire = 0; q_op = OP_NONE; q_addr = '0;
    req_done = 0; req_done_addr = '0;
    for (int k = 0; k < 3; k++) begin evt_valid[k] = 0; evt_idx[k] = 0; evt_addr[k] = '0; evt_status[k] = PBE_FREE; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      int h, dc, outst, used_idx [$];
      logic e_pbc, e_stall, e_byp, present, slot, room;
      @(negedge clk);
      used_idx.delete();
      // ---- events from the PB (distinct entries)
      for (int k = 0; k < 3; k++) evt_valid[k] = 0;
      begin
        // write: to the entry holding a placed address, else to a Free one
        int cand [$];
        cand.delete();
        foreach (rt[a]) cand.push_back(int'((a - 64) / 64));
        if (cand.size() > 0 && $urandom % 6 == 0) begin
          logic [ADDR_W-1:0] a;
          int fr;
          a = pa(cand[$urandom % cand.size()]);
          h = find(a);
          fr = -1;
          for (int i = N - 1; i >= 0; i--) if (m_st[i] == PBE_FREE) fr = i;
          if (h >= 0 || fr >= 0) begin
            evt_valid[0] = 1; evt_idx[0] = 3'(h >= 0 ? h : fr); evt_addr[0] = a;
            evt_status[0] = PBE_DATA;
            req_done = 1; req_done_addr = a;
            used_idx.push_back(int'(evt_idx[0]));
          end else req_done = 0;
        end else req_done = 0;
        cand.delete();
        for (int i = 0; i < N; i++)
          if ((m_st[i] == PBE_DRAIN_ISSUED || m_st[i] == PBE_DRAIN) && m_wb[i] == 0 && !(i inside {used_idx}))
            cand.push_back(i);
        if (cand.size() > 0 && $urandom % 3 == 0) begin
          int i;
          i = cand[$urandom % cand.size()];
          evt_valid[1] = 1; evt_idx[1] = 3'(i); evt_addr[1] = m_addr[i]; evt_status[1] = PBE_FREE;
          used_idx.push_back(i);
        end
        cand.delete();
        for (int i = 0; i < N; i++) if (m_st[i] == PBE_DATA && m_wb[i] < 7 && !(i inside {used_idx})) cand.push_back(i);
        if (cand.size() > 0 && cyc % 2000 < 1000 && $urandom % 8 == 0) begin
          int i;
          i = cand[$urandom % cand.size()];
          evt_valid[2] = 1; evt_idx[2] = 3'(i); evt_addr[2] = m_addr[i]; evt_status[2] = PBE_DRAIN_ISSUED;
        end
      end
      // ---- query
      q_valid = $urandom % 4 != 0;
      q_from_pb = $urandom % 5 == 0;
      // phases of 2000 clocks: drains start only in the first 1000, and
      // acknowledgments dominate the rest so the buffer empties again
      case ((cyc % 2000 < 1000) ? $urandom % 6 : 3 + $urandom % 4)
        0, 1, 2: q_op = OP_MEM_WR;
        3: q_op = OP_MEM_RD;
        4, 5: q_op = OP_WR_ACK;
        default: q_op = ($urandom % 2) ? OP_DRAIN_PATH : OP_RD_DATA;
      endcase
      q_addr = (q_op == OP_MEM_WR && $urandom % 2) ? pa($urandom % 3) : pa($urandom % NA);
      if (q_op == OP_WR_ACK && $urandom % 2) begin
        int i;
        i = $urandom % N;
        if (m_st[i] != PBE_FREE) q_addr = m_addr[i];
      end
      q_fire = 0;
      #1;
      // the switch routes a packet only when it is not stalled
      q_fire = q_valid && !stall && ($urandom % 4 != 0);
      #1;
      // ---- expected decision
      h = find(q_addr);
      dc = 0; outst = 0;
      for (int i = 0; i < N; i++) dc += int'(m_st[i] == PBE_DATA);
      foreach (rt[a]) outst += rt[a];
      present = h >= 0 || rt.exists(q_addr);
      slot = rt.exists(q_addr) ? rt[q_addr] < CMAX : rt.num() < RT;
      room = dc + outst < N;
      e_pbc = 0; e_stall = 0; e_byp = 0;
      if (q_valid && !q_from_pb) begin
        case (q_op)
          OP_MEM_WR: if (present) begin e_pbc = 1; e_stall = !slot; end
                     else if (room && slot) e_pbc = 1;
                     else e_byp = 1;
          OP_MEM_RD: e_pbc = (h >= 0 && (m_st[h] == PBE_DATA || m_st[h] == PBE_DRAIN_ISSUED)) ||
                             rt.exists(q_addr);
          OP_WR_ACK: e_pbc = h >= 0 && m_wb[h] != 0;
          OP_DRAIN_PATH: e_pbc = 1;
          default: e_pbc = 0;
        endcase
      end
      check(to_pbc == e_pbc && stall == e_stall && bypass == e_byp,
            $sformatf("cyc %0d op %s addr %0h: pbc %b/%b stall %b/%b byp %b/%b", cyc, q_op.name(),
                      q_addr, to_pbc, e_pbc, stall, e_stall, bypass, e_byp));
      check(32'(data_count) == dc, $sformatf("data_count %0d exp %0d", data_count, dc));
      @(posedge clk);
      // ---- model update (same clock as the block)
      if (q_fire && e_pbc) n_pbc++;
      n_byp += int'(q_fire && e_byp); n_stall += int'(q_valid && e_stall);
      if (q_fire && q_valid && !q_from_pb && q_op == OP_WR_ACK) begin
        if (e_pbc) begin n_ack_pbc++; m_wb[h]--; end else begin n_ack_host++; n_ack_idle += int'(h >= 0); end
      end
      if (q_fire && q_valid && !q_from_pb && q_op == OP_MEM_RD && e_pbc) n_rd_pbc++;
      if (q_fire && q_valid && q_from_pb && q_op == OP_MEM_WR && h >= 0 && m_st[h] == PBE_DRAIN_ISSUED)
        m_st[h] = PBE_DRAIN;
      if (req_done) begin
        rt[req_done_addr]--;
        if (rt[req_done_addr] == 0) rt.delete(req_done_addr);
      end
      if (q_fire && q_valid && !q_from_pb && q_op == OP_MEM_WR && e_pbc && !e_stall) begin
        if (rt.exists(q_addr)) rt[q_addr]++; else rt[q_addr] = 1;
      end
      for (int k = 0; k < 3; k++)
        if (evt_valid[k]) begin
          m_st[evt_idx[k]] = evt_status[k];
          m_addr[evt_idx[k]] = evt_addr[k];
          if (evt_status[k] == PBE_DRAIN_ISSUED) m_wb[evt_idx[k]]++;
        end
    end
    check(n_pbc > 200 && n_byp > 20 && n_stall > 10 && n_ack_pbc > 10 && n_ack_host > 50 && n_ack_idle > 10 && n_rd_pbc > 20,
          $sformatf("coverage pbc %0d bypass %0d stall %0d ack->pbc %0d ack->host %0d (%0d to a held line) rd->pbc %0d",
                    n_pbc, n_byp, n_stall, n_ack_pbc, n_ack_host, n_ack_idle, n_rd_pbc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
