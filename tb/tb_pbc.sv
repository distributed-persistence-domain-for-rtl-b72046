// Testbench for pbc, the persist buffer controller, at N=8 entries with
// small queues. The TB plays both sides of the PB port: it sends writes,
// reads and DrainPaths as a host would, and acts as the persistent memory
// for the drain writes that come out (storing them and acknowledging each
// after a random delay). Checks, all against values the TB tracks itself:
//   - every write is acknowledged to its host exactly once, with swapped IDs;
//     through an empty controller the first acknowledgment leaves two clocks
//     after the write was accepted;
//   - a read that hits returns the newest data written to its line; a read
//     that is passed on finds the memory already holding that newest data;
//   - a DrainPath comes out only after every buffered line has been written
//     back, and at that point the memory holds the newest data of every line;
//   - at the end every entry is Free again.
// Coverage counters require coalescing, read hits and misses, drains
// started by each of the three reasons, and more than one DrainPath.
module tb_pbc;
  import pcs_pkg::*;
  localparam int N = 8, NA = 24;
  localparam logic [ID_W-1:0] HOST = 12'h101, PM = 12'h202;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready_req, in_ready_rsp, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  logic evt_valid [3]; logic [2:0] evt_idx [3]; logic [ADDR_W-1:0] evt_addr [3];
  pbe_status_e evt_status [3];
  logic req_done; logic [ADDR_W-1:0] req_done_addr;
  logic [3:0] data_count, dt;
  logic ev_write, ev_coalesce, ev_read_hit, ev_read_miss, ev_ack, ev_drain, ev_drain_path;
  int checks = 0, failures = 0;
  longint cyc = 0;

  logic [DATA_W-1:0] latest [NA];
  logic [DATA_W-1:0] mem [NA];
  int host_acks_due [NA];
  int latest_ver [NA], mem_ver [NA];
  int ver_of [logic [DATA_W-1:0]];
  int rd_exp_ver [$];
  logic [DATA_W-1:0] rd_exp_data [$];
  pkt_t ack_q [$];
  longint ack_t [$];
  int n_coal = 0, n_hit = 0, n_miss = 0, n_dp = 0, n_fc = 0, n_dpd = 0, n_dtd = 0, n_wr = 0;
  logic dp_pending = 0;

  pbc #(.N(N), .REQ_DEPTH(4), .RSP_DEPTH(4), .GEN_DEPTH(2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog: dp_pending %b acks queued %0d data_count %0d in_ready %b/%b",
             dp_pending, ack_q.size(), data_count, in_ready_req, in_ready_rsp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int line(logic [ADDR_W-1:0] a);
    return int'(a / 64);
  endfunction

  // drain causes, sampled from inside the controller
  always @(posedge clk) if (rst_n && ev_drain) begin
    n_fc  += int'(dut.fc_drain);
    n_dpd += int'(dut.dp_drain);
    n_dtd += int'(dut.dt_drain);
  end

  // ---- output side: host and memory
  initial begin
    out_ready = 0;
    forever begin
      @(negedge clk);
      out_ready = $urandom % 100 < 85;
      #1;
      if (out_valid && out_ready && rst_n) begin
        automatic pkt_t p = out_pkt;
        automatic int l = line(p.addr);
        case (p.meta.opcode)
          OP_WR_ACK: begin
            check(p.meta.dpid == HOST && p.meta.spid == PM, "host ack IDs");
            check(host_acks_due[l] > 0, $sformatf("unexpected host ack line %0d", l));
            host_acks_due[l]--;
          end
          OP_RD_DATA: begin
            // reads leave in order; a hit returns the newest data written
            // before the read was sent
            n_hit++;
            check(p.meta.dpid == HOST && p.data == rd_exp_data[0], $sformatf("read hit data line %0d", l));
            void'(rd_exp_data.pop_front()); void'(rd_exp_ver.pop_front());
          end
          OP_MEM_RD: begin
            // a passed-on read: memory holds that data or newer
            n_miss++;
            check(p.meta.dpid == PM && mem_ver[l] >= rd_exp_ver[0], $sformatf("read miss line %0d: memory stale", l));
            void'(rd_exp_data.pop_front()); void'(rd_exp_ver.pop_front());
          end
          OP_MEM_WR: begin
            // a drain write: store it and acknowledge later
            automatic pkt_t a = p;
            mem[l] = p.data;
            mem_ver[l] = ver_of[p.data];
            a.meta.spid = p.meta.dpid; a.meta.dpid = p.meta.spid;
            a.meta.opcode = OP_WR_ACK; a.data = '0;
            ack_q.push_back(a);
            ack_t.push_back(cyc + 3 + $urandom % 25);
          end
          OP_DRAIN_PATH: begin
            n_dp++;
            check(data_count == 0, "DrainPath left with Data entries");
            for (int i = 0; i < NA; i++)
              check(mem[i] == latest[i], $sformatf("DrainPath: line %0d not persisted", i));
            dp_pending = 0;
          end
          default: check(0, "unexpected opcode");
        endcase
      end
    end
  end

  // Drive one packet into the controller. While a request waits for room in
  // the Request Buffer, acknowledgments that are due still get in (as they
  // would from the switch), so the TB cannot deadlock the controller.
  task automatic send(input pkt_t p, input logic is_ack);
    logic done;
    done = 0;
    while (!done) begin
      @(negedge clk);
      in_valid = 1; in_pkt = p;
      #1;
      if (is_ack ? in_ready_rsp : in_ready_req) begin
        done = 1;
      end else if (!is_ack && in_ready_rsp && ack_q.size() > 0 && ack_t[0] <= cyc) begin
        in_pkt = ack_q.pop_front();
        void'(ack_t.pop_front());
      end else begin
        in_valid = 0;
        continue;
      end
      @(posedge clk);
      #1 in_valid = 0;
    end
  endtask

  function automatic pkt_t mk(opcode_e op, int l);
    pkt_t p;
    p = '0;
    p.meta.spid = HOST; p.meta.dpid = PM; p.meta.opcode = op; p.meta.tag = 16'($urandom);
    p.addr = ADDR_W'(64 * l);
    return p;
  endfunction

  initial begin
    pkt_t p;
    longint t0;
    in_valid = 0; in_pkt = '0;
    for (int i = 0; i < NA; i++) begin latest[i] = '0; mem[i] = '0; host_acks_due[i] = 0; latest_ver[i] = 0; mem_ver[i] = 0; end
    ver_of['0] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // latency of one write through the empty controller
    p = mk(OP_MEM_WR, 1); p.data = {16{$urandom}};
    latest[1] = p.data; host_acks_due[1]++; latest_ver[1] = 1; ver_of[p.data] = 1;
    @(negedge clk);
    in_valid = 1; in_pkt = p; #1;
    check(in_ready_req, "empty controller accepts a write");
    @(posedge clk); t0 = cyc;
    #1 in_valid = 0;
    while (!(out_valid && out_pkt.meta.opcode == OP_WR_ACK)) @(posedge clk) #1;
    check(cyc - t0 == 2, $sformatf("write-ack latency %0d clocks, expected 2", cyc - t0));
    for (int it = 0; it < 6000; it++) begin
      int r;
      if (ack_q.size() > 0 && ack_t[0] <= cyc) begin
        send(ack_q.pop_front(), 1);
        void'(ack_t.pop_front());
        continue;
      end
      r = $urandom % 100;
      if (dp_pending || r < 10) begin
        @(negedge clk);
      end else if (r < 70) begin
        int l;
        l = (it % 1000 < 500) ? $urandom % 6 : $urandom % NA;   // hot lines, then all
        p = mk(OP_MEM_WR, l); p.data = {16{$urandom}};
        latest[l] = p.data; host_acks_due[l]++;
        latest_ver[l]++; ver_of[p.data] = latest_ver[l];
        n_wr++;
        send(p, 0);
      end else if (r < 97) begin
        int l;
        l = $urandom % NA;
        rd_exp_data.push_back(latest[l]); rd_exp_ver.push_back(latest_ver[l]);
        send(mk(OP_MEM_RD, l), 0);
      end else if (r < 98) begin
        dp_pending = 1;
        send(mk(OP_DRAIN_PATH, 0), 0);
      end else begin
        @(negedge clk);
      end
    end
    // final DrainPath, then return all acknowledgments
    wait (!dp_pending);
    dp_pending = 1;
    send(mk(OP_DRAIN_PATH, 0), 0);
    while (dp_pending || ack_q.size() > 0) begin
      if (ack_q.size() > 0 && ack_t[0] <= cyc) begin
        send(ack_q.pop_front(), 1);
        void'(ack_t.pop_front());
      end else @(negedge clk);
    end
    repeat (20) @(posedge clk);
    for (int i = 0; i < N; i++) check(dut.pb_status[i] == PBE_FREE, $sformatf("entry %0d not Free at end", i));
    for (int i = 0; i < NA; i++) check(host_acks_due[i] == 0, $sformatf("line %0d missing host acks", i));
    $display("writes %0d coalesced %0d read hits %0d misses %0d drainpaths %0d drains fc/dp/dt %0d/%0d/%0d",
             n_wr, n_coal, n_hit, n_miss, n_dp, n_fc, n_dpd, n_dtd);
    check(n_coal > 20 && n_hit > 20 && n_miss > 20 && n_dp > 3 && n_fc > 0 && n_dpd > 0 && n_dtd > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && ev_coalesce) n_coal++;
endmodule
