// pbc_fifo: first-in first-out buffer with valid/ready handshakes.
//
// Used for the persist buffer controller's Request Buffer and Response
// Buffer (incoming packets wait here before the Update/Read PB Entry unit
// takes them) and for the output buffers of the request and response
// generators. A word is accepted when in_valid && in_ready and leaves when
// out_valid && out_ready; both may happen in the same clock. A word written
// into an empty buffer is visible at the output one clock later. The design
// asks only for FIFO order; depth and handshake are this design's choice.
module pbc_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic [CW-1:0] count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
