// Testbench for pbc_fifo, the FIFO behind the PBC's Request and Response
// Buffers and the generator output queues. Random pushes and pops are
// compared with a queue model: order, data, count, and the full/empty flags
// (in_ready drops only when DEPTH words are held, out_valid only when none).
module tb_pbc_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  pbc_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < 60;
      out_ready = ($urandom % 100) < (cyc < 500 ? 35 : 65);
      in_data   = W'($urandom);
      #1;
      check(count == model.size(), $sformatf("count %0d model %0d", count, model.size()));
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid && model.size() > 0)
        check(out_data == model[0], $sformatf("data %h exp %h", out_data, model[0]));
      @(posedge clk);
      if (out_valid && out_ready && model.size() > 0) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
