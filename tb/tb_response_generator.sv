// Testbench for response_generator, DEPTH=4. Random requests of the three
// kinds are offered; a write acknowledgment must carry the swapped port IDs,
// the write-ack opcode, the request's tag, LD-ID and address and zero data;
// read data the swapped IDs, the read-data opcode and the buffered block; a
// forwarded read must be unchanged. Order and the one-clock latency through
// an empty buffer are checked too.
module tb_response_generator;
  import pcs_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  rg_kind_e in_kind;
  pkt_t in_pkt, out_pkt;
  logic [DATA_W-1:0] in_data;
  int checks = 0, failures = 0;
  pkt_t q [$];
  int n_kind [3] = '{0, 0, 0};

  response_generator #(.DEPTH(4)) dut (.*);

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
    in_valid = 0; out_ready = 0; in_kind = RG_FORWARD; in_pkt = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      pkt_t e;
      @(negedge clk);
      in_valid = $urandom % 2;
      out_ready = $urandom % 100 < (cyc < 1500 ? 40 : 80);
      in_kind = rg_kind_e'($urandom % 3);
      in_pkt = pkt_t'({20{$urandom}});
      in_pkt.meta.opcode = (in_kind == RG_WR_ACK) ? OP_MEM_WR : OP_MEM_RD;
      in_data = {16{$urandom}};
      #1;
      check(in_ready == (q.size() < 4) && out_valid == (q.size() > 0), "flags");
      if (out_valid && q.size() > 0) check(out_pkt == q[0], $sformatf("cyc %0d packet", cyc));
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) begin
        e = in_pkt;
        if (in_kind != RG_FORWARD) begin
          e.meta.spid = in_pkt.meta.dpid;
          e.meta.dpid = in_pkt.meta.spid;
          e.meta.opcode = (in_kind == RG_WR_ACK) ? OP_WR_ACK : OP_RD_DATA;
          e.data = (in_kind == RG_WR_ACK) ? '0 : in_data;
        end
        q.push_back(e);
        n_kind[in_kind]++;
      end
    end
    check(n_kind[0] > 100 && n_kind[1] > 100 && n_kind[2] > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
