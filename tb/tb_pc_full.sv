// tb_pc_full: the program counter at its default configuration (32-bit hybrid PC:
// 3 radix-2 bits within a cache line, 29-bit MFSR across lines), taken through a
// complete sequence of operations: reset, a straight run of 4096 fetches (512 cache
// lines), a stall, absolute jumps with and without ENABLE, a second run from the jump
// target, and a jump into the reserved zero line. Every cycle is compared with a
// reference model written here from the definition of the hybrid counter; the run
// must also never revisit an address and must fetch each line's eight words in order.
module tb_pc_full;
  import pc_pkg::*;

  localparam int N = 32;

  int checks   = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic logic [28:0] ref_mfsr29(input logic [28:0] v);
    mfsr_taps_t  t;
    logic [28:0] r;
    t = mfsr_taps(29);
    for (int i = 0; i < 29; i++) r[i] = v[(i == 0) ? 28 : i - 1];
    if (t.count > 0) r[t.tap0.dst] ^= v[t.tap0.src];
    if (t.count > 1) r[t.tap1.dst] ^= v[t.tap1.src];
    return r;
  endfunction

  function automatic logic [31:0] ref_next(input logic [31:0] v);
    logic [28:0] hi;
    hi = v[31:3];
    if (v[2:0] == 3'd7) hi = ref_mfsr29(hi);
    return {hi, 3'(v[2:0] + 3'd1)};
  endfunction

  logic        clk = 1'b0;
  logic        rst, load, enable;
  logic [31:0] data, pc, expv;

  always #5 clk = ~clk;

  pc_circuit dut (.clk, .rst, .load, .enable, .data, .pc);

  task automatic cycle(input logic r, input logic l, input logic e, input logic [31:0] d);
    @(negedge clk);
    rst = r; load = l; enable = e; data = d;
    if (r)       expv = 32'd8;
    else if (!e) expv = expv;
    else if (l)  expv = d;
    else         expv = ref_next(expv);
    @(posedge clk);
    #1;
    check(pc == expv, $sformatf("pc=%08x expected %08x", pc, expv));
  endtask

  logic [31:0] seen[$];
  logic [31:0] prev;
  bit          ok;

  task automatic run(input int steps);
    ok = 1'b1;
    seen.delete();
    for (int k = 0; k < steps; k++) begin
      prev = pc;
      cycle(1'b0, 1'b0, 1'b1, '0);
      if (prev[2:0] != 3'd7 && pc[31:3] != prev[31:3]) ok = 1'b0;  // left a line early
      if (pc[31:3] == '0) ok = 1'b0;                                // entered the zero line
      seen.push_back(pc);
    end
    check(ok, "line order broken or zero line entered");
    seen.sort();
    ok = 1'b1;
    for (int k = 1; k < seen.size(); k++) if (seen[k] == seen[k-1]) ok = 1'b0;
    check(ok, "an address was fetched twice within the run");
  endtask

  initial begin
    rst = 1'b1; load = 1'b0; enable = 1'b0; data = '0; expv = '0;
    cycle(1'b1, 1'b0, 1'b0, '0);
    check(pc == 32'd8, "reset value is not word 0 of line 1");
    run(4096);
    // Stall: ENABLE low holds the PC, even with LOAD high.
    repeat (5) cycle(1'b0, 1'b0, 1'b0, '0);
    cycle(1'b0, 1'b1, 1'b0, 32'h1234_5678);
    // Absolute jump, then run from there.
    cycle(1'b0, 1'b1, 1'b1, 32'hDEAD_BEE8);
    check(pc == 32'hDEAD_BEE8, "jump not taken");
    run(1024);
    // Jump into the zero line: the low bits cycle there and the line never changes.
    cycle(1'b0, 1'b1, 1'b1, 32'd5);
    for (int k = 0; k < 16; k++) begin
      cycle(1'b0, 1'b0, 1'b1, '0);
      check(pc == 32'((5 + k + 1) % 8), "zero line left");
    end
    // Reset again in the middle of operation.
    cycle(1'b1, 1'b0, 1'b1, '0);
    check(pc == 32'd8, "second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: 10000 clock cycles.
  initial begin
    #100_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
