// Testbench for update_read_pb_entry at N=8. Random heads of the Request and
// Response Buffers, lookup results, free-entry results and downstream
// readiness are applied, and every command and handshake is compared with
// the rules worked out here: an acknowledgment is taken first and releases
// its entry; a write needs room in the PB and in the response queue, then
// writes the entry, refreshes its LRU position, reports completion and
// returns an acknowledgment; a read returns buffered data on a hit
// (refreshing LRU) and is forwarded on a miss; a DrainPath goes to the
// Drain PB unit; anything else is forwarded.
module tb_update_read_pb_entry;
  import pcs_pkg::*;
  localparam int N = 8;
  logic rsp_valid, rsp_ready, req_valid, req_ready;
  pkt_t req_pkt;
  logic lk_hit [2]; logic [2:0] lk_idx [2];
  logic [DATA_W-1:0] pb_data [N];
  logic fc_ok, fc_coalesce; logic [2:0] fc_idx;
  logic wr_en; logic [2:0] wr_idx; logic [ADDR_W-1:0] wr_addr; meta_t wr_meta; logic [DATA_W-1:0] wr_data;
  logic ack_en; logic [2:0] ack_idx; logic touch_en; logic [2:0] touch_idx;
  logic rg_valid, rg_ready; rg_kind_e rg_kind; pkt_t rg_pkt; logic [DATA_W-1:0] rg_data;
  logic dp_valid, dp_ready; pkt_t dp_pkt;
  logic req_done; logic [ADDR_W-1:0] req_done_addr;
  logic ev_write, ev_coalesce, ev_read_hit, ev_read_miss, ev_ack;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  int n_w = 0, n_h = 0, n_m = 0, n_a = 0, n_dp = 0;

  update_read_pb_entry #(.N(N)) dut (.*);

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

  initial begin
    for (int i = 0; i < N; i++) pb_data[i] = {16{32'(i + 100)}};
    for (int t = 0; t < 5000; t++) begin
      logic is_wr, is_rd, is_dp, e_rsp_rdy, e_req_rdy, e_wr, e_touch, e_rgv, e_dpv;
      logic [2:0] e_tidx;
      rg_kind_e e_kind;
      rsp_valid = $urandom % 4 == 0; req_valid = $urandom % 4 != 0;
      req_pkt = pkt_t'({20{$urandom}});
      case ($urandom % 4)
        0: req_pkt.meta.opcode = OP_MEM_WR;
        1: req_pkt.meta.opcode = OP_MEM_RD;
        2: req_pkt.meta.opcode = OP_DRAIN_PATH;
        default: req_pkt.meta.opcode = OP_RD_DATA;
      endcase
      for (int p = 0; p < 2; p++) begin lk_hit[p] = $urandom % 2; lk_idx[p] = 3'($urandom); end
      fc_ok = $urandom % 2; fc_coalesce = $urandom % 2; fc_idx = 3'($urandom);
      rg_ready = $urandom % 4 != 0; dp_ready = $urandom % 2;
      #1;
      is_wr = req_pkt.meta.opcode == OP_MEM_WR;
      is_rd = req_pkt.meta.opcode == OP_MEM_RD;
      is_dp = req_pkt.meta.opcode == OP_DRAIN_PATH;
      e_rsp_rdy = rsp_valid;
      e_req_rdy = 0; e_wr = 0; e_touch = 0; e_rgv = 0; e_dpv = 0; e_kind = RG_FORWARD; e_tidx = 0;
      if (!rsp_valid && req_valid) begin
        if (is_wr) begin
          e_kind = RG_WR_ACK; e_rgv = fc_ok; e_wr = fc_ok && rg_ready; e_req_rdy = e_wr;
          e_touch = e_wr; e_tidx = fc_idx;
        end else if (is_rd) begin
          e_kind = lk_hit[1] ? RG_RD_DATA : RG_FORWARD; e_rgv = 1; e_req_rdy = rg_ready;
          e_touch = rg_ready && lk_hit[1]; e_tidx = lk_idx[1];
        end else if (is_dp) begin
          e_dpv = 1; e_req_rdy = dp_ready;
        end else begin
          e_rgv = 1; e_req_rdy = rg_ready;
        end
      end
      check(rsp_ready == e_rsp_rdy && ack_en == (rsp_valid && lk_hit[0]) &&
            (!ack_en || ack_idx == lk_idx[0]) && ev_ack == rsp_valid, $sformatf("t=%0d ack path", t));
      check(req_ready == e_req_rdy, $sformatf("t=%0d req_ready %b exp %b", t, req_ready, e_req_rdy));
      check(wr_en == e_wr && (!e_wr || (wr_idx == fc_idx && wr_addr == req_pkt.addr &&
            wr_data == req_pkt.data && wr_meta == req_pkt.meta)), $sformatf("t=%0d write", t));
      check(req_done == e_wr && (!e_wr || req_done_addr == req_pkt.addr) &&
            ev_write == e_wr && ev_coalesce == (e_wr && fc_coalesce), "write completion");
      check(touch_en == e_touch && (!e_touch || touch_idx == e_tidx), $sformatf("t=%0d touch", t));
      check(rg_valid == e_rgv && (!e_rgv || (rg_kind == e_kind && rg_pkt == req_pkt &&
            (e_kind != RG_RD_DATA || rg_data == pb_data[lk_idx[1]]))), $sformatf("t=%0d response", t));
      check(dp_valid == e_dpv && (!e_dpv || dp_pkt == req_pkt), "drain path");
      check(ev_read_hit == (is_rd && e_touch) && ev_read_miss == (is_rd && e_req_rdy && !lk_hit[1]),
            "read events");
      n_w += int'(e_wr); n_h += int'(ev_read_hit); n_m += int'(ev_read_miss);
      n_a += int'(ack_en); n_dp += int'(e_dpv && dp_ready);
      #9;
    end
    check(n_w > 50 && n_h > 50 && n_m > 50 && n_a > 50 && n_dp > 50, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
