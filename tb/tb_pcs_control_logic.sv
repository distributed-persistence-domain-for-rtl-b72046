// Testbench for pcs_control_logic with four external ports. The routing
// table is loaded through its write port, then random packets are offered
// on all ports (each held until taken) while output readiness and the PBC's
// buffer room change at random. The TB keeps its own round-robin pointer
// and checks every clock that: a packet from the PB port goes first when
// its output is ready; otherwise the first waiting external port at or
// after the pointer is chosen; the chosen packet appears only on its
// destination (the PB port when the selector says so, else the port the
// table gives for its destination ID); it is taken only when that output
// has room and it is not stalled; and the stall, bypass and to-PBC pulses
// match. The selector's decision itself is tested on its own.
module tb_pcs_control_logic;
  import pcs_pkg::*;
  localparam int NUM_PORTS = 4, NP = 5, N = 8, RT = 4, NID = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid [NP], in_ready [NP], out_valid [NP], out_ready [NUM_PORTS];
  pkt_t in_pkt [NP], out_pkt [NP];
  logic pb_req_ready, pb_rsp_ready, rt_we;
  logic [ID_W-1:0] rt_id;
  logic [2:0] rt_port;
  logic evt_valid [3]; logic [2:0] evt_idx [3]; logic [ADDR_W-1:0] evt_addr [3];
  pbe_status_e evt_status [3];
  logic req_done; logic [ADDR_W-1:0] req_done_addr;
  logic ev_to_pbc, ev_bypass, ev_stall;
  logic [3:0] sel_data_count;
  int checks = 0, failures = 0;
  int route [NID];
  int ptr = 0;
  int n_pb_first = 0, n_fire = 0, n_pbc = 0, n_byp = 0, n_stall = 0, n_blocked = 0;
  int served [NUM_PORTS];

  pcs_control_logic #(.NUM_PORTS(NUM_PORTS), .N(N), .RT(RT)) dut (.*);

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

  function automatic pkt_t rnd_pkt(int src);
    pkt_t p;
    p = pkt_t'({20{$urandom}});
    p.meta.dpid = 12'($urandom % NID);
    p.addr = ADDR_W'(64 * 32'($urandom % 16));
    case ($urandom % 5)
      0: p.meta.opcode = OP_MEM_WR;
      1: p.meta.opcode = OP_MEM_RD;
      2: p.meta.opcode = OP_RD_DATA;
      3: p.meta.opcode = OP_WR_ACK;
      default: p.meta.opcode = (src == NUM_PORTS) ? OP_MEM_WR : OP_DRAIN_PATH;
    endcase
    return p;
  endfunction

  initial begin
    for (int p = 0; p < NP; p++) begin in_valid[p] = 0; in_pkt[p] = '0; end
    for (int p = 0; p < NUM_PORTS; p++) begin out_ready[p] = 0; served[p] = 0; end
    for (int k = 0; k < 3; k++) begin evt_valid[k] = 0; evt_idx[k] = 0; evt_addr[k] = '0; evt_status[k] = PBE_FREE; end
    pb_req_ready = 0; pb_rsp_ready = 0; rt_we = 0; rt_id = 0; rt_port = 0;
    req_done = 0; req_done_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NID; i++) begin
      route[i] = $urandom % NUM_PORTS;
      @(negedge clk);
      rt_we = 1; rt_id = 12'(i); rt_port = 3'(route[i]);
    end
    @(negedge clk);
    rt_we = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int sel, dest, pbd;
      logic dready, fire;
      @(negedge clk);
      for (int p = 0; p < NP; p++)
        if (!in_valid[p] && $urandom % 3 == 0) begin
          in_valid[p] = 1; in_pkt[p] = rnd_pkt(p);
          // one phase hammers a single line so its tracking counter saturates
          if (cyc >= 3000 && cyc < 3500 && p < NUM_PORTS) begin
            in_pkt[p].meta.opcode = OP_MEM_WR; in_pkt[p].addr = '0;
          end
        end
      for (int p = 0; p < NUM_PORTS; p++) out_ready[p] = $urandom % 100 < 70;
      pb_req_ready = $urandom % 100 < 80; pb_rsp_ready = $urandom % 100 < 80;
      // placements let tracked writes leave the selector's Request Table
      req_done = 0;
      if (dut.u_pbcs.rt_valid[cyc % RT] && $urandom % 4 == 0 &&
          !(cyc >= 3000 && cyc < 3500 && dut.u_pbcs.rt_addr[cyc % RT] == '0)) begin
        req_done = 1; req_done_addr = dut.u_pbcs.rt_addr[cyc % RT];
      end
      #1;
      // expected selection
      pbd = route[32'(in_pkt[NUM_PORTS].meta.dpid) % NID];
      sel = -1;
      if (in_valid[NUM_PORTS] && out_ready[pbd]) sel = NUM_PORTS;
      else
        for (int k = 0; k < NUM_PORTS; k++)
          if (sel < 0 && in_valid[(ptr + k) % NUM_PORTS]) sel = (ptr + k) % NUM_PORTS;
      if (sel < 0) begin
        for (int p = 0; p < NP; p++) check(!in_ready[p] && !out_valid[p], "idle");
      end else begin
        dest = dut.to_pbc ? NUM_PORTS : route[32'(in_pkt[sel].meta.dpid) % NID];
        check(!(sel == NUM_PORTS && dut.to_pbc), "PB-port packets are never sent back to the PBC");
        dready = (dest == NUM_PORTS) ? ((in_pkt[sel].meta.opcode == OP_WR_ACK) ? pb_rsp_ready : pb_req_ready)
                                     : out_ready[dest];
        fire = dready && !dut.stall;
        for (int p = 0; p < NP; p++) begin
          check(in_ready[p] == (fire && p == sel), $sformatf("cyc %0d in_ready[%0d] sel %0d", cyc, p, sel));
          check(out_valid[p] == (!dut.stall && p == dest), $sformatf("cyc %0d out_valid[%0d] dest %0d", cyc, p, dest));
          if (out_valid[p]) check(out_pkt[p] == in_pkt[sel], "packet unchanged");
        end
        check(ev_to_pbc == (fire && dut.to_pbc) && ev_bypass == (fire && dut.bypass) && ev_stall == dut.stall,
              "event pulses");
        n_pb_first += int'(sel == NUM_PORTS && in_valid[ptr]);
        n_fire += int'(fire); n_pbc += int'(fire && dut.to_pbc); n_byp += int'(fire && dut.bypass);
        n_stall += int'(dut.stall); n_blocked += int'(!dready);
        if (sel != NUM_PORTS) ptr = (sel + 1) % NUM_PORTS;
        if (fire && sel < NUM_PORTS) served[sel]++;
      end
      begin
        logic taken [NP];
        for (int p = 0; p < NP; p++) taken[p] = in_ready[p];
        @(posedge clk);
        #1;
        for (int p = 0; p < NP; p++) if (taken[p]) in_valid[p] = 0;
      end
    end
    $display("fired %0d to_pbc %0d bypass %0d stall %0d blocked %0d pb-first %0d served %0d %0d %0d %0d",
             n_fire, n_pbc, n_byp, n_stall, n_blocked, n_pb_first, served[0], served[1], served[2], served[3]);
    check(n_pbc > 100 && n_byp > 10 && n_stall > 0 && n_blocked > 100 && n_pb_first > 50, "coverage");
    for (int p = 0; p < NUM_PORTS; p++)
      check(served[p] > n_fire / 8, $sformatf("port %0d starved", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
