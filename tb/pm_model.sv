// pm_model: behavioural model of a CXL-attached persistent memory node,
// for testbenches only (not synthesizable logic).
//
// Accepts one packet per clock on in_* and answers in arrival order after a
// fixed latency: a write is stored and acknowledged (OP_WR_ACK, address
// kept, port IDs swapped), a read returns the stored block (OP_RD_DATA), a
// DrainPath is answered with OP_DRAIN_ACK. After a write the model takes
// no packet for WR_GAP clocks (limited write bandwidth of the media). A block never written reads as
// init_data(addr). WR_LAT / RD_LAT are in clocks. peek_* gives the stored
// contents to the testbench.
module pm_model
  import pcs_pkg::*;
#(
  parameter int unsigned WR_LAT = 20,
  parameter int unsigned RD_LAT = 6,
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned WR_GAP = 0     // clocks a write occupies the media
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  pkt_t              in_pkt,
  output logic              out_valid,
  input  logic              out_ready,
  output pkt_t              out_pkt,
  input  logic [ADDR_W-1:0] peek_addr,
  output logic [DATA_W-1:0] peek_data,
  output int unsigned       n_writes
);

  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  pkt_t        q_pkt  [$];
  longint      q_time [$];
  longint      now;
  longint      busy_until;

  function automatic logic [DATA_W-1:0] init_data(input logic [ADDR_W-1:0] a);
    return {8{a[45:0], 18'h2A5A5}};
  endfunction

  assign in_ready  = (q_pkt.size() < QDEPTH) && (now >= busy_until);
  assign out_valid = (q_pkt.size() != 0) && (q_time[0] <= now);
  assign out_pkt   = (q_pkt.size() != 0) ? q_pkt[0] : '0;
  assign peek_data = mem.exists(peek_addr) ? mem[peek_addr] : init_data(peek_addr);

  always @(posedge clk) begin
    if (!rst_n) begin
      now      <= 0;
      busy_until <= 0;
      n_writes <= 0;
      q_pkt.delete();
      q_time.delete();
    end else begin
      now <= now + 1;
      if (out_valid && out_ready) begin
        void'(q_pkt.pop_front());
        void'(q_time.pop_front());
      end
      if (in_valid && in_ready) begin
        pkt_t r;
        longint t;
        r = in_pkt;
        r.meta.spid = in_pkt.meta.dpid;
        r.meta.dpid = in_pkt.meta.spid;
        t = now + ((in_pkt.meta.opcode == OP_MEM_WR) ? WR_LAT : RD_LAT);
        if (q_time.size() != 0 && q_time[$] > t) t = q_time[$];
        unique case (in_pkt.meta.opcode)
          OP_MEM_WR: begin
            mem[in_pkt.addr] = in_pkt.data;
            n_writes <= n_writes + 1;
            busy_until <= now + 1 + WR_GAP;
            r.meta.opcode = OP_WR_ACK;
            r.data = '0;
          end
          OP_MEM_RD: begin
            r.meta.opcode = OP_RD_DATA;
            r.data = mem.exists(in_pkt.addr) ? mem[in_pkt.addr] : init_data(in_pkt.addr);
          end
          OP_DRAIN_PATH: r.meta.opcode = OP_DRAIN_ACK;
          default: r.meta.opcode = OP_NONE;
        endcase
        q_pkt.push_back(r);
        q_time.push_back(t);
      end
    end
  end

endmodule
