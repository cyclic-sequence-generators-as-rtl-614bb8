// mfsr_next: increment operator of an N-bit maximum-cycle MFSR (Multiple Feedback
// Shift Register), the "counter" of an FSR program counter.
//
// The bits form a ring, next[0] = q[N-1] and next[i] = q[i-1]. The taps from
// pc_pkg::mfsr_taps(N) add one XOR to at most two stages, next[dst] = q[dst-1] ^ q[src].
// The path from any state bit to any next-state bit is one XOR at most, so the
// delay does not grow with N, which is the reason for using an MFSR as a program
// counter. From any non-zero state the sequence runs through all 2^N-1 non-zero
// values before it repeats. The all-zero state maps to itself (the "zero address").
//
// Interface: q is the present PC value, next is the value after one increment.
// Purely combinational; the register that holds the PC is in pc_circuit. Most
// output bits are plain wires from an input bit (the shift), so a synthesis report
// shows them as having no logic. That is the point of the circuit, not an omission.
//
// The ring-with-XOR structure, the single XOR level and the fan-in/fan-out limit of 2
// follow the paper, and so do the 8-bit taps. The stage numbering and the tap sets
// of the other widths are this design's own (see pc_pkg).
module mfsr_next
  import pc_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] q,
  output logic [N-1:0] next
);

  localparam mfsr_taps_t TAPS = mfsr_taps(N);

  if (N < MFSR_MIN_WIDTH || N > MFSR_MAX_WIDTH) begin : g_bad_width
    $error("mfsr_next: N=%0d is outside the tap table (%0d..%0d)", N, MFSR_MIN_WIDTH,
           MFSR_MAX_WIDTH);
  end

  localparam int unsigned NTAPS = TAPS.count;
  localparam int unsigned SRC0  = TAPS.tap0.src;
  localparam int unsigned DST0  = TAPS.tap0.dst;
  localparam int unsigned SRC1  = TAPS.tap1.src;
  localparam int unsigned DST1  = TAPS.tap1.dst;

  for (genvar i = 0; i < N; i++) begin : g_stage
    localparam int unsigned PREV = (i == 0) ? N - 1 : i - 1;
    if (NTAPS > 0 && i == DST0) begin : g_tap0
      assign next[i] = q[PREV] ^ q[SRC0];
    end else if (NTAPS > 1 && i == DST1) begin : g_tap1
      assign next[i] = q[PREV] ^ q[SRC1];
    end else begin : g_shift
      assign next[i] = q[PREV];
    end
  end

endmodule
