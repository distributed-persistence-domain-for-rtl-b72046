// Testbench for drain_pb. A DrainPath packet is accepted, after which the
// unit must hold drain_req while Data entries remain, refuse further
// DrainPaths, and pass the packet on unchanged only once the Data count has
// reached zero; the number of clocks from acceptance to forwarding must be
// one more than the clocks the TB took to empty the buffer.
module tb_drain_pb;
  import pcs_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, drain_req, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  logic [5:0] data_count;
  int checks = 0, failures = 0;

  drain_pb #(.N(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_pkt = '0; data_count = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 50; r++) begin
      pkt_t p;
      int start_cnt, cyc;
      p = '0;
      p.meta.opcode = OP_DRAIN_PATH;
      p.meta.spid = 12'($urandom); p.meta.dpid = 12'($urandom);
      p.addr = ADDR_W'({$urandom, $urandom});
      start_cnt = (r % 5 == 0) ? 0 : 1 + $urandom % 32;
      @(negedge clk);
      data_count = 6'(start_cnt);
      in_valid = 1; in_pkt = p;
      #1 check(in_ready, "idle unit accepts a DrainPath");
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      cyc = 0;
      // drain one entry every 1..3 clocks
      while (data_count != 0) begin
        #1 check(drain_req && !out_valid && !in_ready, "drain_req held while Data entries remain");
        in_valid = 1;   // a second DrainPath must be refused
        @(posedge clk); cyc++;
        @(negedge clk);
        in_valid = 0;
        if ($urandom % 2) data_count = data_count - 1;
      end
      #1 check(!drain_req, "no drain_req at zero");
      // the unit sees zero this clock and forwards on the next
      @(posedge clk);
      @(negedge clk);
      #1 check(out_valid && out_pkt == p, "DrainPath forwarded unchanged");
      out_ready = 0;
      @(posedge clk);
      @(negedge clk);
      #1 check(out_valid, "held while output blocked");
      out_ready = 1;
      @(posedge clk);
      @(negedge clk);
      out_ready = 0;
      #1 check(!out_valid && in_ready, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
