// hybrid_next: increment operator of the hybrid (FSR / radix-2) program counter.
//
// The PC is split in two. The low LOW_BITS bits are a radix-2 counter that steps
// through the instructions of one cache line (3 bits: eight 32-bit instructions in a
// 32-byte line). The upper N-LOW_BITS bits are an MFSR that selects the cache line.
// The low counter increments on every step; when it wraps from all-ones to zero the
// MFSR takes one step too. This is the concatenation C_(2^L) into an MFSR, so the
// combined counter has a cycle of 2^L * (2^(N-L) - 1) addresses and fetches all
// instructions of a line in order before leaving it.
//
// The line whose MFSR part is zero is never left: the MFSR maps zero to zero, so the
// low bits just cycle within that line. The counting sequence never enters it, which
// leaves the first line free for other use (such as an interrupt vector table).
//
// Interface: q is the present PC value, next the value after one increment.
// Combinational. The 3-bit width of the low part, its radix-2 order and the carry
// into the MFSR on wrap follow the paper; the parameterisation of LOW_BITS is this
// design's own.
module hybrid_next
  import pc_pkg::*;
#(
  parameter int unsigned N        = 32,
  parameter int unsigned LOW_BITS = HYBRID_LOW_BITS
) (
  input  logic [N-1:0] q,
  output logic [N-1:0] next
);

  localparam int unsigned HI_BITS = N - LOW_BITS;

  if (LOW_BITS < 1 || LOW_BITS >= N) begin : g_bad_split
    $error("hybrid_next: LOW_BITS=%0d must lie in 1..N-1", LOW_BITS);
  end

  logic [LOW_BITS-1:0] low;
  logic [HI_BITS-1:0]  high, high_stepped;
  logic                line_end;

  assign low  = q[LOW_BITS-1:0];
  assign high = q[N-1:LOW_BITS];

  mfsr_next #(.N(HI_BITS)) u_line (
    .q   (high),
    .next(high_stepped)
  );

  // Low count at its last value: the next increment moves to the next line.
  assign line_end = &low;

  always_comb begin
    next[LOW_BITS-1:0] = low + 1'b1;
    next[N-1:LOW_BITS] = line_end ? high_stepped : high;
  end

endmodule
