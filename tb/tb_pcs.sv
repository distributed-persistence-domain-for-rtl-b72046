// tb_pcs: end-to-end test of the persistent CXL switch at its default size
// (16 ports, 32 persist-buffer entries, adaptive drain threshold).
//
// Eight hosts sit on ports 0-7 (port IDs 0x100+h) and eight persistent
// memory models on ports 8-15 (port IDs 0x200+m); the block with line
// address a lives in memory a % 8. Each host owns 12 lines and repeats:
// a burst of 1-12 writes to distinct lines issued back to back (a flush
// burst), a wait for all their acknowledgments (the fence), then 1-3 reads,
// each checked against the last acknowledged value of that line. At the
// end host 0 sends a DrainPath to every memory; when all DrainAcks are
// back, every memory must hold the newest value of every line it owns and
// the persist buffer must hold no Data entry. Every 400 clocks the links
// to the memories stall for 120 clocks, so write-backs back up, the buffer
// fills and writes must bypass it or wait.
//
// Checked as well: the first write, into an idle switch, is acknowledged
// two clocks after it is offered (persisted at the switch), well before a
// memory write would be; and every mechanism of the switch happened at
// least once: early-acknowledged writes, write bypass when the buffer is
// full, write coalescing, reads answered by the switch, threshold drains,
// drains forced by a waiting write, write-back acknowledgments, DrainPath,
// and the adaptive threshold moving both up and down.
module tb_pcs;
  import pcs_pkg::*;

  localparam int NP = 16, NH = 8, NM = 8, LINES = 12, ROUNDS = 60;
  localparam int WR_LAT = 20, RD_LAT = 6, WR_GAP = 10;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid  [NP];
  logic        in_ready  [NP];
  pkt_t        in_pkt    [NP];
  logic        out_valid [NP];
  logic        out_ready [NP];
  pkt_t        out_pkt   [NP];
  logic        rt_we;
  logic [11:0] rt_id;
  logic [4:0]  rt_port;
  pcs_stats_t  stats;
  logic [5:0]  pb_data_count, dt;

  pcs dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_pkt,
    .rt_we, .rt_id, .rt_port, .stats, .pb_data_count, .drain_threshold (dt)
  );

  logic [ADDR_W-1:0] peek_addr;
  logic [DATA_W-1:0] peek_data [NM];
  int unsigned       pm_writes [NM];

  // mem_block stalls the memory links, as a congested fabric would
  logic mem_block = 1'b0;
  logic pm_rdy [NM];

  for (genvar h = 0; h < NH; h++) begin : g_host_ready
    assign out_ready[h] = 1'b1;
  end

  for (genvar m = 0; m < NM; m++) begin : g_pm
    assign out_ready[NH+m] = pm_rdy[m] && !mem_block;
    pm_model #(.WR_LAT(WR_LAT), .RD_LAT(RD_LAT), .WR_GAP(WR_GAP)) u_pm (
      .clk, .rst_n,
      .in_valid (out_valid[NH+m] && !mem_block), .in_ready (pm_rdy[m]), .in_pkt (out_pkt[NH+m]),
      .out_valid (in_valid[NH+m]), .out_ready (in_ready[NH+m]), .out_pkt (in_pkt[NH+m]),
      .peek_addr, .peek_data (peek_data[m]), .n_writes (pm_writes[m])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [DATA_W-1:0] init_data(input logic [ADDR_W-1:0] a);
    return {8{a[45:0], 18'h2A5A5}};
  endfunction

  function automatic logic [ADDR_W-1:0] line_addr(input int h, input int i);
    return ADDR_W'((h << 8) | i);
  endfunction

  // ---- reference state ----
  logic [DATA_W-1:0] ref_mem [logic [ADDR_W-1:0]];
  logic [DATA_W-1:0] pend    [logic [ADDR_W-1:0]];
  int  acks_seen [NH];
  int  reads_seen [NH];
  int  drain_acks = 0;
  int  hosts_done = 0;
  longint cyc = 0;
  longint first_issue = -1, first_ack = -1;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- responses to hosts ----
  always @(posedge clk) begin
    if (rst_n) begin
      for (int h = 0; h < NH; h++) begin
        if (out_valid[h]) begin
          pkt_t p;
          p = out_pkt[h];
          check(p.meta.dpid == 12'(16'h100 + h), $sformatf("host %0d got a packet for %h", h, p.meta.dpid));
          unique case (p.meta.opcode)
            OP_WR_ACK: begin
              check(pend.exists(p.addr), $sformatf("host %0d: ack for line %h not pending", h, p.addr));
              if (pend.exists(p.addr)) begin
                ref_mem[p.addr] = pend[p.addr];
                pend.delete(p.addr);
              end
              if (first_ack < 0) first_ack = cyc;
              acks_seen[h]++;
            end
            OP_RD_DATA: begin
              logic [DATA_W-1:0] exp;
              exp = ref_mem.exists(p.addr) ? ref_mem[p.addr] : init_data(p.addr);
              check(p.data == exp, $sformatf("host %0d: read of line %h returned stale data", h, p.addr));
              reads_seen[h]++;
            end
            OP_DRAIN_ACK: drain_acks++;
            default: check(1'b0, $sformatf("host %0d: unexpected opcode %0d", h, p.meta.opcode));
          endcase
        end
      end
    end
  end

  // ---- host traffic ----
  task automatic send(input int h, input pkt_t p);
    @(negedge clk);
    in_valid[h] = 1'b1;
    in_pkt[h]   = p;
    forever begin
      #1;
      if (in_ready[h]) break;
      @(negedge clk);
    end
    @(posedge clk);
    #1;
    in_valid[h] = 1'b0;
  endtask

  function automatic pkt_t mk(input int h, input opcode_e op, input logic [ADDR_W-1:0] a,
                              input logic [DATA_W-1:0] d);
    pkt_t p;
    p = '0;
    p.meta.spid   = 12'(16'h100 + h);
    p.meta.dpid   = 12'(16'h200 + (a % NM));
    p.meta.opcode = op;
    p.meta.tag    = 16'(a);
    p.addr        = a;
    p.data        = d;
    return p;
  endfunction

  function automatic logic [DATA_W-1:0] rnd_data();
    logic [DATA_W-1:0] d;
    for (int w = 0; w < DATA_W / 32; w++) d[w*32 +: 32] = $urandom;
    return d;
  endfunction

  task automatic host(input int h);
    for (int r = 0; r < ROUNDS; r++) begin
      int k, target, first, nrd;
      k      = 1 + ($urandom % LINES);
      first  = $urandom % LINES;
      target = acks_seen[h] + k;
      for (int j = 0; j < k; j++) begin
        logic [ADDR_W-1:0] a;
        logic [DATA_W-1:0] d;
        a = line_addr(h, (first + j) % LINES);
        d = rnd_data();
        pend[a] = d;
        send(h, mk(h, OP_MEM_WR, a, d));
      end
      while (acks_seen[h] < target) @(posedge clk);
      nrd = 1 + ($urandom % 3);
      for (int j = 0; j < nrd; j++) begin
        int nb;
        nb = reads_seen[h];
        send(h, mk(h, OP_MEM_RD, line_addr(h, $urandom % LINES), '0));
        while (reads_seen[h] == nb) @(posedge clk);
      end
    end
  endtask

  // ---- mechanism counters ----
  int n_fc_drain = 0, n_dt_up = 0, n_dt_down = 0;
  logic [5:0] dt_q;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_pbc.fc_drain && dut.u_pbc.ev_drain) n_fc_drain++;
      if (dt > dt_q) n_dt_up++;
      if (dt < dt_q) n_dt_down++;
      dt_q <= dt;
    end else dt_q <= dt;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      in_valid[p] = 1'b0;
      in_pkt[p]   = '0;
    end
    for (int h = 0; h < NH; h++) begin
      acks_seen[h]  = 0;
      reads_seen[h] = 0;
    end
    rt_we = 1'b0; rt_id = '0; rt_port = '0; peek_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // routing table: hosts and memories
    for (int i = 0; i < NH + NM; i++) begin
      @(negedge clk);
      rt_we   = 1'b1;
      rt_id   = (i < NH) ? 12'(16'h100 + i) : 12'(16'h200 + i - NH);
      rt_port = 5'(i);
    end
    @(negedge clk);
    rt_we = 1'b0;

    // one write into an idle switch: acknowledged by the switch itself
    begin
      logic [ADDR_W-1:0] a;
      a = line_addr(0, 0);
      pend[a] = rnd_data();
      first_issue = cyc + 1;
      send(0, mk(0, OP_MEM_WR, a, pend[a]));
      while (acks_seen[0] < 1) @(posedge clk);
      check(first_ack - first_issue == 2,
            $sformatf("early write-ack latency %0d clocks, expected 2", first_ack - first_issue));
      check(first_ack - first_issue < WR_LAT, "early acknowledgment not faster than memory");
      acks_seen[0] = 0;
    end

    for (int h = 0; h < NH; h++) begin
      fork
        automatic int hh = h;
        begin
          host(hh);
          hosts_done++;
        end
      join_none
    end
    fork
      begin : congestion
        forever begin
          repeat (400) @(negedge clk);
          mem_block = 1'b1;
          repeat (120) @(negedge clk);
          mem_block = 1'b0;
        end
      end
    join_none
    wait (hosts_done == NH);
    disable congestion;
    mem_block = 1'b0;
    repeat (200) @(posedge clk);

    // DrainPath to every memory, from host 0 (as its root complex would)
    for (int m = 0; m < NM; m++) begin
      pkt_t p;
      p = mk(0, OP_DRAIN_PATH, '0, '0);
      p.meta.dpid = 12'(16'h200 + m);
      send(0, p);
    end
    while (drain_acks < NM) @(posedge clk);
    repeat (5) @(posedge clk);
    check(pb_data_count == 0, "Data entries left after DrainPath");
    for (int h = 0; h < NH; h++)
      for (int i = 0; i < LINES; i++) begin
        logic [ADDR_W-1:0] a;
        a = line_addr(h, i);
        peek_addr = a;
        #1;
        if (ref_mem.exists(a))
          check(peek_data[a % NM] == ref_mem[a], $sformatf("memory holds stale line %h after DrainPath", a));
      end

    $display("stats: to_pbc=%0d persisted=%0d bypass=%0d coalesced=%0d rd_hit=%0d rd_miss=%0d acks=%0d drains=%0d drain_paths=%0d stalls=%0d fc_drains=%0d dt_up=%0d dt_down=%0d",
             stats.wr_to_pbc, stats.wr_persisted, stats.wr_bypass, stats.wr_coalesced, stats.rd_hit,
             stats.rd_miss, stats.ack_in, stats.drains, stats.drain_paths, stats.stalls,
             n_fc_drain, n_dt_up, n_dt_down);
    check(stats.wr_persisted > 0, "no write persisted at the switch");
    check(stats.wr_bypass > 0,    "no write bypassed the full buffer");
    check(stats.wr_coalesced > 0, "no write coalesced");
    check(stats.rd_hit > 0,       "no read answered by the switch");
    check(stats.drains > 0,       "no entry drained");
    check(stats.ack_in > 0,       "no write-back acknowledgment taken");
    check(stats.drain_paths == NM, "DrainPath not passed on to every memory");
    check(n_fc_drain > 0,         "no drain forced by a waiting write");
    check(n_dt_up > 0,            "adaptive threshold never rose");
    check(n_dt_down > 0,          "adaptive threshold never fell");
    check(stats.wr_persisted == stats.wr_to_pbc, "writes routed to the buffer were not all persisted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (hosts done %0d, drain acks %0d, persisted %0d, bypass %0d, Data entries %0d)",
             hosts_done, drain_acks, stats.wr_persisted, stats.wr_bypass, pb_data_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
