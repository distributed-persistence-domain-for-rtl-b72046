// Testbench for request_generator at N=8, DEPTH=4. Drained entries and
// DrainPath packets are offered at random, sometimes in the same clock; a
// drained entry must win that clock. Each accepted drained entry must come
// out as a memory write with the entry's address, data, metadata and index,
// each DrainPath unchanged, in acceptance order, with a one-clock latency
// through an empty queue.
module tb_request_generator;
  import pcs_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic drn_valid, drn_ready, dp_valid, dp_ready, out_valid, out_ready, out_is_drain;
  logic [2:0] drn_idx, out_idx;
  logic [ADDR_W-1:0] drn_addr;
  meta_t drn_meta;
  logic [DATA_W-1:0] drn_data;
  pkt_t dp_pkt, out_pkt;
  int checks = 0, failures = 0;
  typedef struct { pkt_t p; logic d; logic [2:0] i; } exp_t;
  exp_t q [$];
  int n_drn = 0, n_dp = 0, n_both = 0;

  request_generator #(.N(8), .DEPTH(4)) dut (.*);

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
    drn_valid = 0; dp_valid = 0; out_ready = 0; drn_idx = 0; drn_addr = '0; drn_meta = '0;
    drn_data = '0; dp_pkt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      logic was_empty;
      @(negedge clk);
      drn_valid = $urandom % 3 == 0; dp_valid = $urandom % 3 == 0;
      out_ready = $urandom % 100 < (cyc < 1500 ? 40 : 80);
      drn_idx = 3'($urandom); drn_addr = ADDR_W'({$urandom, $urandom});
      drn_meta = meta_t'({$urandom, $urandom});
      drn_meta.opcode = OP_MEM_WR;
      drn_data = {16{$urandom}};
      dp_pkt = pkt_t'({20{$urandom}}); dp_pkt.meta.opcode = OP_DRAIN_PATH;
      #1;
      check(drn_ready == (q.size() < 4) && dp_ready == (q.size() < 4 && !drn_valid), "ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (out_valid && q.size() > 0)
        check(out_pkt == q[0].p && out_is_drain == q[0].d && (!q[0].d || out_idx == q[0].i),
              $sformatf("cyc %0d packet", cyc));
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (drn_valid && drn_ready) begin
        exp_t e;
        e.p.meta = drn_meta; e.p.addr = drn_addr; e.p.data = drn_data; e.d = 1; e.i = drn_idx;
        q.push_back(e); n_drn++;
        if (dp_valid) n_both++;
      end else if (dp_valid && dp_ready) begin
        exp_t e;
        e.p = dp_pkt; e.d = 0; e.i = 0;
        q.push_back(e); n_dp++;
      end
    end
    check(n_drn > 100 && n_dp > 100 && n_both > 20, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
