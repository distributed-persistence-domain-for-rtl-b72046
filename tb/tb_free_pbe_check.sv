// Testbench for free_pbe_check. Every combination of the inputs at N=8 is
// applied and the outputs are compared with the rule: a write may go ahead
// if its line is already in the PB (coalescing into that entry) or a Free
// entry exists (taking it); otherwise it waits and a drain is requested.
module tb_free_pbe_check;
  localparam int N = 8;
  logic is_write, hit, free_any, ok, coalesce, drain_req;
  logic [2:0] hit_idx, free_idx, alloc_idx;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  free_pbe_check #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {is_write, hit, free_any, hit_idx, free_idx} = 9'(v);
      #1;
      checks++;
      if (ok !== (is_write && (hit || free_any)) ||
          coalesce !== (is_write && hit) ||
          drain_req !== (is_write && !hit && !free_any) ||
          (is_write && hit && alloc_idx !== hit_idx) ||
          (is_write && !hit && free_any && alloc_idx !== free_idx)) begin
        failures++;
        $display("FAIL: v=%0d ok=%b co=%b dr=%b idx=%0d", v, ok, coalesce, drain_req, alloc_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
