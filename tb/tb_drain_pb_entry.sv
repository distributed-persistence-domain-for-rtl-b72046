// Testbench for drain_pb_entry. Random PB contents (status, LRU order, write
// back limit) are applied at N=8; the victim must be the Data entry with the
// smallest LRU value that is neither at its write-back limit nor being
// overwritten this clock, offered only while some drain request is up, and
// the Data->Drain Issued command must be issued only on the handshake.
module tb_drain_pb_entry;
  import pcs_pkg::*;
  localparam int N = 8;
  logic drain_req [3];
  pbe_status_e status [N];
  logic [2:0] lru [N];
  logic wb_full [N];
  logic wr_en;
  logic [2:0] wr_idx;
  logic [ADDR_W-1:0] addr [N];
  meta_t meta [N];
  logic [DATA_W-1:0] data [N];
  logic out_valid, out_ready, st_en;
  logic [2:0] out_idx, st_idx;
  logic [ADDR_W-1:0] out_addr;
  meta_t out_meta;
  logic [DATA_W-1:0] out_data;
  logic [3:0] st_from;
  pbe_status_e st_to;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  drain_pb_entry #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [N];
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < N; i++) begin
        status[i]  = pbe_status_e'($urandom % 4);
        lru[i]     = 3'(perm[i]);
        wb_full[i] = ($urandom % 8) == 0;
        addr[i]    = ADDR_W'(64 * i + 5);
        meta[i]    = '0;
        meta[i].tag = 16'(i);
        data[i]    = {16{32'(i * 3 + 1)}};
      end
      for (int k = 0; k < 3; k++) drain_req[k] = ($urandom % 3) == 0;
      wr_en = $urandom % 2; wr_idx = 3'($urandom);
      out_ready = $urandom % 2;
      #1;
      begin
        int best;
        logic any;
        best = -1;
        any  = drain_req[0] || drain_req[1] || drain_req[2];
        for (int i = 0; i < N; i++)
          if (status[i] == PBE_DATA && !wb_full[i] && !(wr_en && 32'(wr_idx) == i) &&
              (best < 0 || lru[i] < lru[best])) best = i;
        checks++;
        if (out_valid != (any && best >= 0)) begin
          failures++; $display("FAIL: t=%0d out_valid=%b exp %b", t, out_valid, any && best >= 0);
        end else if (out_valid) begin
          checks++;
          if (32'(out_idx) != best || out_addr != addr[best] || out_data != data[best] ||
              out_meta.tag != 16'(best)) begin
            failures++; $display("FAIL: t=%0d victim %0d exp %0d", t, out_idx, best);
          end
        end
        checks++;
        if (st_en != (out_valid && out_ready) ||
            (st_en && (st_idx != out_idx || st_to != PBE_DRAIN_ISSUED ||
                       st_from != (4'b1 << PBE_DATA)))) begin
          failures++; $display("FAIL: t=%0d status command", t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
