// tb_pc_circuit: end-to-end testbench of the program counter.
//
// Two 10-bit PCs run side by side from the same control inputs, one hybrid (3 radix-2
// bits, 7-bit MFSR) and one pure MFSR. A cycle-accurate reference model written here
// predicts each PC: synchronous reset to the first non-zero state, hold while ENABLE is
// low, DATA taken when LOAD and ENABLE are both high, otherwise one counter step
// (computed from the pc_pkg tap table). The test walks both counters through a full
// cycle (1016 and 1023 steps), then applies random control, then loads the zero line
// and the zero address. It counts how often each mechanism occurred (reset, hold,
// load, load ignored for lack of ENABLE, in-line step, line change, full-cycle wrap,
// zero-line trap, zero-address lock) and fails if any never did.
module tb_pc_circuit;
  import pc_pkg::*;

  localparam int N = 10;

  int checks   = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic logic [N-1:0] ref_mfsr(input logic [N-1:0] v, input int n);
    mfsr_taps_t   t;
    logic [N-1:0] r;
    t = mfsr_taps(n);
    r = '0;
    for (int i = 0; i < n; i++) r[i] = v[(i == 0) ? n - 1 : i - 1];
    if (t.count > 0) r[t.tap0.dst] ^= v[t.tap0.src];
    if (t.count > 1) r[t.tap1.dst] ^= v[t.tap1.src];
    return r;
  endfunction

  function automatic logic [N-1:0] ref_hybrid(input logic [N-1:0] v);
    logic [N-1:0] hi;
    hi = v >> 3;
    if (v[2:0] == 3'd7) hi = ref_mfsr(hi, N - 3);
    return (hi << 3) | N'(3'(v[2:0] + 3'd1));
  endfunction

  logic         clk = 1'b0;
  logic         rst, load, enable;
  logic [N-1:0] data;
  logic [N-1:0] pc_h, pc_m;      // DUT outputs
  logic [N-1:0] exp_h, exp_m;    // reference model

  always #5 clk = ~clk;

  pc_circuit #(.N(N), .KIND(PC_HYBRID)) dut_h (
    .clk, .rst, .load, .enable, .data, .pc(pc_h)
  );
  pc_circuit #(.N(N), .KIND(PC_MFSR)) dut_m (
    .clk, .rst, .load, .enable, .data, .pc(pc_m)
  );

  // Mechanism counters.
  int n_reset, n_hold, n_load, n_load_ignored, n_step_in_line, n_line_change;
  int n_wrap_h, n_wrap_m, n_zero_line, n_zero_lock;

  // One clock: apply inputs, update the reference, compare after the edge.
  task automatic cycle(input logic r, input logic l, input logic e, input logic [N-1:0] d);
    @(negedge clk);
    rst = r; load = l; enable = e; data = d;
    if (r) begin
      exp_h = N'(8);
      exp_m = N'(1);
      n_reset++;
    end else if (!e) begin
      n_hold++;
      if (l) n_load_ignored++;
    end else if (l) begin
      exp_h = d;
      exp_m = d;
      n_load++;
    end else begin
      if (exp_h[2:0] == 3'd7) n_line_change++;
      else                    n_step_in_line++;
      if (exp_h[N-1:3] == '0) n_zero_line++;
      if (exp_m == '0)        n_zero_lock++;
      exp_h = ref_hybrid(exp_h);
      exp_m = ref_mfsr(exp_m, N);
    end
    @(posedge clk);
    #1;
    check(pc_h == exp_h, $sformatf("hybrid pc=%03x expected %03x", pc_h, exp_h));
    check(pc_m == exp_m, $sformatf("mfsr pc=%03x expected %03x", pc_m, exp_m));
  endtask

  int          first_h, first_m;
  logic [N-1:0] d;

  initial begin
    rst = 1'b1; load = 1'b0; enable = 1'b0; data = '0;
    exp_h = '0; exp_m = '0;
    // Reset, with ENABLE low: reset does not need ENABLE.
    cycle(1'b1, 1'b0, 1'b0, '0);
    // Full cycle of both counters.
    first_h = 0;
    first_m = 0;
    for (int k = 1; k <= 1023; k++) begin
      cycle(1'b0, 1'b0, 1'b1, '0);
      if (first_h == 0 && pc_h == N'(8)) first_h = k;
      if (first_m == 0 && pc_m == N'(1)) first_m = k;
    end
    check(first_h == 8 * (2 ** (N - 3) - 1), $sformatf("hybrid cycle %0d", first_h));
    check(first_m == 2 ** N - 1, $sformatf("mfsr cycle %0d", first_m));
    if (first_h == 8 * (2 ** (N - 3) - 1)) n_wrap_h++;
    if (first_m == 2 ** N - 1) n_wrap_m++;
    // Random control.
    for (int k = 0; k < 4000; k++) begin
      d = N'($urandom);
      if ($urandom_range(0, 9) == 0) d[N-1:3] = '0;  // sometimes a zero-line target
      cycle($urandom_range(0, 99) == 0, $urandom_range(0, 9) == 0,
            $urandom_range(0, 9) < 7, d);
    end
    // Zero line (hybrid) and zero address (MFSR): load 0, then count.
    cycle(1'b0, 1'b1, 1'b1, N'(0));
    for (int k = 0; k < 20; k++) begin
      cycle(1'b0, 1'b0, 1'b1, '0);
      check(pc_h[N-1:3] == '0 && pc_h[2:0] == 3'(k + 1), "hybrid did not stay in line 0");
      check(pc_m == '0, "mfsr left the zero address");
    end
    // Every mechanism must have happened.
    check(n_reset > 1,        "no reset during operation");
    check(n_hold > 0,         "ENABLE never held the PC");
    check(n_load > 0,         "no load");
    check(n_load_ignored > 0, "no load without ENABLE");
    check(n_step_in_line > 0, "no in-line step");
    check(n_line_change > 0,  "no line change");
    check(n_wrap_h > 0,       "hybrid never wrapped");
    check(n_wrap_m > 0,       "mfsr never wrapped");
    check(n_zero_line > 0,    "zero line never counted in");
    check(n_zero_lock > 0,    "zero address never held");
    $display("mechanisms: reset=%0d hold=%0d load=%0d load_ignored=%0d step=%0d line_change=%0d wrap_h=%0d wrap_m=%0d zero_line=%0d zero_lock=%0d",
             n_reset, n_hold, n_load, n_load_ignored, n_step_in_line, n_line_change,
             n_wrap_h, n_wrap_m, n_zero_line, n_zero_lock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: 20000 clock cycles.
  initial begin
    #200_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
