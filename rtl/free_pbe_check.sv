// free_pbe_check: admission check for writes leaving the Request Buffer.
//
// A write may start in the Update/Read PB Entry unit only if the persist
// buffer already holds an entry with the same address (the older version is
// overwritten in place) or has at least one Free entry. Otherwise the write
// waits at the head of the Request Buffer and a drain signal goes to Drain PB
// Entry, so a Data entry is eventually written back and freed. Holding the
// write back, rather than taking it and then finding no room, keeps the
// unit free to process write-acknowledgments and so avoids a deadlock: this
// is the design's reasoning. Which Free entry is used (the lowest-index one
// reported by the buffer) is this design's choice. Purely combinational.
module free_pbe_check #(
  parameter int unsigned N  = 32,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          is_write,   // head of Request Buffer is a write
  input  logic          hit,        // its address is in the PB (non-Free)
  input  logic [IW-1:0] hit_idx,
  input  logic          free_any,   // PB has a Free entry
  input  logic [IW-1:0] free_idx,
  output logic          ok,         // write may proceed
  output logic          coalesce,   // it overwrites an existing entry
  output logic [IW-1:0] alloc_idx,  // entry to write
  output logic          drain_req   // no room: ask for a drain
);

  always_comb begin
    coalesce  = is_write && hit;
    ok        = is_write && (hit || free_any);
    alloc_idx = hit ? hit_idx : free_idx;
    drain_req = is_write && !hit && !free_any;
  end

endmodule
