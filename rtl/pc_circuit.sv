// pc_circuit: program counter built around a cyclic sequence generator.
//
// The PC register holds OUT. Its D input comes from a two-way multiplexer: with LOAD
// high it takes DATA (an absolute jump), otherwise the counter's next value of OUT.
// ENABLE is the register's clock enable, so the PC advances (or loads) only on clock
// edges where ENABLE is high and holds otherwise. RESET is synchronous and overrides
// ENABLE. The counter in the feedback path is chosen by KIND:
//   PC_MFSR   - a pure N-bit MFSR: the PC visits the 2^N-1 non-zero addresses in a
//               pseudo-random order, one XOR level of logic per step;
//   PC_HYBRID - LOW_BITS radix-2 bits within a cache line and an MFSR across lines.
//
// Interface: clk, rst (synchronous, active high), load, enable, data (N bits),
// pc (N bits, the register output, valid every cycle). Timing: one clock edge per
// increment or load, no pipeline; pc changes only on a rising edge of clk.
//
// The structure (counter, LOAD mux, register with CE and reset) and the port set
// follow the paper's PC-circuit block diagram and black-box model. That LOAD acts
// only with ENABLE high follows the diagram, where ENABLE drives the register's clock
// enable. The reset value is this design's choice: the paper's diagram only shows a
// reset pin, but a cleared MFSR would stay at zero for ever, so RESET_VALUE is the
// first non-zero state (1 for the MFSR, the start of line 1 for the hybrid). The
// default width of 32 bits is the largest the paper evaluates.
module pc_circuit
  import pc_pkg::*;
#(
  parameter int unsigned   N           = 32,
  parameter counter_kind_e KIND        = PC_HYBRID,
  parameter int unsigned   LOW_BITS    = HYBRID_LOW_BITS,
  parameter logic [N-1:0]  RESET_VALUE = (KIND == PC_HYBRID) ? N'(1) << LOW_BITS : N'(1)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic         enable,
  input  logic [N-1:0] data,
  output logic [N-1:0] pc
);

  logic [N-1:0] counted;  // counter output: increment of pc
  logic [N-1:0] d;        // multiplexer output: register input

  if (KIND == PC_HYBRID) begin : g_hybrid
    hybrid_next #(.N(N), .LOW_BITS(LOW_BITS)) u_counter (
      .q   (pc),
      .next(counted)
    );
  end else begin : g_mfsr
    mfsr_next #(.N(N)) u_counter (
      .q   (pc),
      .next(counted)
    );
  end

  assign d = load ? data : counted;

  always_ff @(posedge clk) begin
    if (rst)         pc <= RESET_VALUE;
    else if (enable) pc <= d;
  end

  // A counting step never leaves the non-zero part of the state space: the counter
  // part that selects the line (the whole PC for the MFSR) stays non-zero.
  property p_no_lockup;
    @(posedge clk) disable iff (rst)
      (enable && !load && (pc >> ((KIND == PC_HYBRID) ? LOW_BITS : 0)) != '0)
        |=> (pc >> ((KIND == PC_HYBRID) ? LOW_BITS : 0)) != '0;
  endproperty
  a_no_lockup: assert property (p_no_lockup)
    else $error("pc_circuit: counting step reached the zero line/address");

endmodule
