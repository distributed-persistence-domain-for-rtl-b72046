// Testbench for persist_buffer at N=8. A reference model of the table
// (status, LRU order, write-backs in flight, address and data per entry)
// runs next to the block. Each clock the TB issues random legal commands:
// a write to the entry that holds the address or to a Free one, up to two
// conditional status commands, an acknowledgment for an entry with a
// write-back in flight, and an LRU touch. All lookups, counts, table
// outputs and status-change events are compared with the model every clock.
module tb_persist_buffer;
  import pcs_pkg::*;
  localparam int N = 8, NST = 2, WBW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en; logic [2:0] wr_idx; logic [ADDR_W-1:0] wr_addr; meta_t wr_meta; logic [DATA_W-1:0] wr_data;
  logic st_en [NST]; logic [2:0] st_idx [NST]; logic [3:0] st_from [NST]; pbe_status_e st_to [NST];
  logic ack_en; logic [2:0] ack_idx;
  logic touch_en; logic [2:0] touch_idx;
  logic [ADDR_W-1:0] lk_addr [2]; logic lk_hit [2]; logic [2:0] lk_idx [2]; pbe_status_e lk_status [2];
  logic free_any; logic [2:0] free_idx; logic [3:0] data_count, used_count;
  pbe_status_e status_o [N]; logic [2:0] lru_o [N]; logic wb_full [N];
  logic [ADDR_W-1:0] addr_o [N]; meta_t meta_o [N]; logic [DATA_W-1:0] data_o [N];
  logic evt_valid [NST+2]; logic [2:0] evt_idx [NST+2]; logic [ADDR_W-1:0] evt_addr [NST+2];
  pbe_status_e evt_status [NST+2];
  int checks = 0, failures = 0;

  // model
  pbe_status_e m_st [N]; int m_lru [N]; int m_wb [N]; logic [ADDR_W-1:0] m_addr [N];
  logic [DATA_W-1:0] m_data [N];
  int n_free_by_ack = 0, n_di = 0, n_coal = 0;

  persist_buffer #(.N(N), .NST(NST), .WBW(WBW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] rnd_addr();
    return ADDR_W'(64 * ($urandom % 12));
  endfunction

  initial begin
    pbe_status_e nst [N];
    logic ev_ok;
    for (int i = 0; i < N; i++) begin m_st[i] = PBE_FREE; m_lru[i] = i; m_wb[i] = 0; end
    wr_en = 0; ack_en = 0; touch_en = 0; wr_idx = 0; ack_idx = 0; touch_idx = 0;
    wr_addr = '0; wr_meta = '0; wr_data = '0;
    for (int k = 0; k < NST; k++) begin st_en[k] = 0; st_idx[k] = 0; st_from[k] = 0; st_to[k] = PBE_FREE; end
    lk_addr[0] = '0; lk_addr[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int hit, fr, cnt_d, cnt_u;
      logic [ADDR_W-1:0] a;
      @(negedge clk);
      // ---- random legal commands
      a = rnd_addr();
      hit = -1; fr = -1;
      for (int i = N - 1; i >= 0; i--) begin
        if (m_st[i] != PBE_FREE && m_addr[i] == a) hit = i;
        if (m_st[i] == PBE_FREE) fr = i;
      end
      wr_en = ($urandom % 3 == 0) && (hit >= 0 || fr >= 0);
      wr_idx = 3'(hit >= 0 ? hit : (fr >= 0 ? fr : 0));
      wr_addr = a; wr_data = {16{$urandom}}; wr_meta = '0; wr_meta.tag = 16'($urandom);
      for (int k = 0; k < NST; k++) begin
        st_en[k] = $urandom % 2; st_idx[k] = 3'($urandom);
        st_from[k] = (k == 0) ? 4'b0010 : 4'b0100;        // Data->DI, DI->Drain
        st_to[k] = (k == 0) ? PBE_DRAIN_ISSUED : PBE_DRAIN;
      end
      begin
        int cand [$];
        cand.delete();
        for (int i = 0; i < N; i++) if (m_wb[i] != 0) cand.push_back(i);
        ack_en = cand.size() > 0 && ($urandom % 2);
        ack_idx = cand.size() > 0 ? 3'(cand[$urandom % cand.size()]) : 3'd0;
      end
      touch_en = $urandom % 2; touch_idx = 3'($urandom);
      lk_addr[0] = rnd_addr(); lk_addr[1] = (m_st[0] != PBE_FREE) ? m_addr[0] : rnd_addr();
      #1;
      // ---- combinational outputs against the model (current state)
      cnt_d = 0; cnt_u = 0; fr = -1;
      for (int i = N - 1; i >= 0; i--) begin
        if (m_st[i] == PBE_DATA) cnt_d++;
        if (m_st[i] != PBE_FREE) cnt_u++; else fr = i;
        check(status_o[i] == m_st[i] && 32'(lru_o[i]) == m_lru[i] && wb_full[i] == (m_wb[i] == 7),
              $sformatf("cyc %0d entry %0d st %0d/%0d lru %0d/%0d", cyc, i, status_o[i], m_st[i], lru_o[i], m_lru[i]));
        if (m_st[i] != PBE_FREE)
          check(addr_o[i] == m_addr[i] && data_o[i] == m_data[i], $sformatf("entry %0d contents", i));
      end
      check(32'(data_count) == cnt_d && 32'(used_count) == cnt_u, "counts");
      check(free_any == (fr >= 0) && (fr < 0 || 32'(free_idx) == fr), "free entry");
      for (int p = 0; p < 2; p++) begin
        int h;
        h = -1;
        for (int i = N - 1; i >= 0; i--) if (m_st[i] != PBE_FREE && m_addr[i] == lk_addr[p]) h = i;
        check(lk_hit[p] == (h >= 0) && (h < 0 || (32'(lk_idx[p]) == h && lk_status[p] == m_st[h])),
              $sformatf("lookup %0d", p));
      end
      // ---- model next state
      for (int i = 0; i < N; i++) nst[i] = m_st[i];
      ev_ok = 1'b1;
      begin
        logic af;
        af = ack_en && m_wb[ack_idx] == 1 &&
             (m_st[ack_idx] == PBE_DRAIN_ISSUED || m_st[ack_idx] == PBE_DRAIN) && !(wr_en && wr_idx == ack_idx);
        if (af) begin nst[ack_idx] = PBE_FREE; n_free_by_ack++; end
        ev_ok &= (evt_valid[1] == af) && (!af || (evt_idx[1] == ack_idx && evt_status[1] == PBE_FREE &&
                                                   evt_addr[1] == m_addr[ack_idx]));
      end
      for (int k = 0; k < NST; k++) begin
        logic ap;
        ap = st_en[k] && st_from[k][nst[st_idx[k]]] && !(wr_en && wr_idx == st_idx[k]);
        ev_ok &= (evt_valid[k+2] == ap) && (!ap || (evt_idx[k+2] == st_idx[k] && evt_status[k+2] == st_to[k]));
        if (ap) begin
          nst[st_idx[k]] = st_to[k];
          if (st_to[k] == PBE_DRAIN_ISSUED) begin m_wb[st_idx[k]]++; n_di++; end
        end
      end
      ev_ok &= (evt_valid[0] == wr_en) && (!wr_en || (evt_idx[0] == wr_idx && evt_status[0] == PBE_DATA));
      check(ev_ok, $sformatf("cyc %0d events", cyc));
      if (ack_en && m_wb[ack_idx] != 0) m_wb[ack_idx]--;
      if (wr_en) begin
        if (m_st[wr_idx] != PBE_FREE) n_coal++;
        nst[wr_idx] = PBE_DATA; m_addr[wr_idx] = wr_addr; m_data[wr_idx] = wr_data;
      end
      if (touch_en) begin
        int t;
        t = m_lru[touch_idx];
        for (int i = 0; i < N; i++) if (m_lru[i] > t) m_lru[i]--;
        m_lru[touch_idx] = N - 1;
      end
      for (int i = 0; i < N; i++) m_st[i] = nst[i];
      @(posedge clk);
    end
    check(n_free_by_ack > 20 && n_di > 20 && n_coal > 20,
          $sformatf("coverage: freed %0d drains %0d overwrites %0d", n_free_by_ack, n_di, n_coal));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
