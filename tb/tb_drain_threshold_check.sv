// Testbench for drain_threshold_check. Three instances run side by side in
// the eager, lazy and adaptive modes with N=32. The eager and lazy
// thresholds must stay at 0 and 24; the adaptive one starts at 16 and, after
// each placed write, rises by C when more than P=50% of the entries are
// Free and falls by C when fewer are, clamped to 0..N-1. drain_req must be
// asserted exactly when the Data count exceeds the threshold.
module tb_drain_threshold_check;
  import pcs_pkg::*;
  localparam int N = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [5:0] data_count, used_count;
  logic write_done;
  logic [5:0] dt_e, dt_l, dt_a;
  logic dr_e, dr_l, dr_a;
  int checks = 0, failures = 0;
  int model_dt;

  drain_threshold_check #(.N(N), .MODE(DT_EAGER)) u_e
    (.clk, .rst_n, .data_count, .used_count, .write_done, .dt(dt_e), .drain_req(dr_e));
  drain_threshold_check #(.N(N), .MODE(DT_LAZY)) u_l
    (.clk, .rst_n, .data_count, .used_count, .write_done, .dt(dt_l), .drain_req(dr_l));
  drain_threshold_check #(.N(N), .MODE(DT_ADAPTIVE)) u_a
    (.clk, .rst_n, .data_count, .used_count, .write_done, .dt(dt_a), .drain_req(dr_a));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ups = 0, downs = 0;
    data_count = 0; used_count = 0; write_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    model_dt = 16;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // phases: mostly empty, mostly full, random
      if (cyc < 600)       used_count = 6'($urandom % 12);
      else if (cyc < 1800) used_count = 6'(20 + $urandom % 13);
      else                 used_count = 6'($urandom % 33);
      data_count = 6'($urandom % (32'(used_count) + 1));
      write_done = $urandom % 2;
      #1;
      check(dt_e == 0 && dt_l == 24, $sformatf("fixed dt %0d %0d", dt_e, dt_l));
      check(dt_a == 6'(model_dt), $sformatf("adaptive dt %0d model %0d", dt_a, model_dt));
      check(dr_e == (data_count > 0) && dr_l == (data_count > 24) &&
            dr_a == (32'(data_count) > model_dt), "drain_req");
      @(posedge clk);
      if (write_done) begin
        if ((32 - 32'(used_count)) * 100 > 50 * N) begin
          if (model_dt < N - 1) begin model_dt++; ups++; end
        end else if ((32 - 32'(used_count)) * 100 < 50 * N) begin
          if (model_dt > 0) begin model_dt--; downs++; end
        end
      end
    end
    check(ups > 10 && downs > 10, $sformatf("threshold moved up %0d down %0d", ups, downs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
