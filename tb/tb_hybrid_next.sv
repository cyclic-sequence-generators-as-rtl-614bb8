// tb_hybrid_next: self-checking testbench of hybrid_next.
//
// Three instances: N=10 and N=12 (MFSR parts of 7 and 9 bits) and the default 32-bit
// one. Every step is compared with a reference written here from the definition:
// the low three bits count up modulo 8, and the upper bits take one MFSR step
// (computed from the pc_pkg tap table) exactly when the low bits wrap from 7 to 0.
// N=10 is checked exhaustively and walked through its whole cycle, which must be
// 8*(2^7-1) = 1016 distinct addresses, none in line 0, with the eight words of each
// line fetched in order. The zero line must be a trap that the low bits cycle in.
module tb_hybrid_next;
  import pc_pkg::*;

  int checks   = 0;
  int failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Reference MFSR step on the low n bits of v.
  function automatic logic [31:0] ref_mfsr(input logic [31:0] v, input int n);
    mfsr_taps_t  t;
    logic [31:0] r;
    t = mfsr_taps(n);
    r = '0;
    for (int i = 0; i < n; i++) r[i] = v[(i == 0) ? n - 1 : i - 1];
    if (t.count > 0) r[t.tap0.dst] ^= v[t.tap0.src];
    if (t.count > 1) r[t.tap1.dst] ^= v[t.tap1.src];
    return r;
  endfunction

  // Reference hybrid step, 3 low bits.
  function automatic logic [31:0] ref_hybrid(input logic [31:0] v, input int n);
    logic [31:0] hi, r;
    hi = v >> 3;
    if (v[2:0] == 3'd7) hi = ref_mfsr(hi, n - 3);
    r = (hi << 3) | 32'((v[2:0] + 3'd1) & 3'd7);
    return r;
  endfunction

  logic [9:0]  q10, n10;
  logic [11:0] q12, n12;
  logic [31:0] q32, n32;

  hybrid_next #(.N(10)) dut10 (.q(q10), .next(n10));
  hybrid_next #(.N(12)) dut12 (.q(q12), .next(n12));
  hybrid_next           dut32 (.q(q32), .next(n32));

  bit seen[1024];
  int steps;
  int line_ends;
  bit ok;

  initial begin
    // Exhaustive N=10.
    for (int v = 0; v < 1024; v++) begin
      q10 = 10'(v);
      #1;
      check(32'(n10) == ref_hybrid(32'(v), 10),
            $sformatf("N=10 q=%03x next=%03x ref=%03x", v, n10, ref_hybrid(32'(v), 10)));
    end
    // Zero line is a trap: the low bits cycle, the line stays 0.
    for (int v = 0; v < 8; v++) begin
      q10 = 10'(v);
      #1;
      check(n10 == 10'((v + 1) % 8), $sformatf("N=10 zero line q=%0d next=%0d", v, n10));
    end
    // Whole cycle of N=10 from the start of line 1.
    foreach (seen[i]) seen[i] = 1'b0;
    q10 = 10'd8;
    steps = 0;
    line_ends = 0;
    ok = 1'b1;
    do begin
      #1;
      if (seen[q10] || q10[9:3] == '0) ok = 1'b0;
      seen[q10] = 1'b1;
      if (q10[2:0] != 3'd7 && n10[9:3] != q10[9:3]) ok = 1'b0;  // stays in its line
      if (q10[2:0] == 3'd7) line_ends++;
      q10 = n10;
      steps++;
    end while (q10 != 10'd8 && steps < 5000);
    check(ok, "N=10 cycle revisits an address, enters line 0 or leaves a line early");
    check(steps == 8 * 127, $sformatf("N=10 cycle length %0d, expected 1016", steps));
    check(line_ends == 127, $sformatf("N=10 visited %0d lines, expected 127", line_ends));
    // Random N=12 and N=32.
    for (int t = 0; t < 2000; t++) begin
      q12 = 12'($urandom);
      q32 = $urandom;
      if (t % 4 == 0) begin  // make line ends frequent
        q12[2:0] = 3'd7;
        q32[2:0] = 3'd7;
      end
      #1;
      check(32'(n12) == ref_hybrid(32'(q12), 12),
            $sformatf("N=12 q=%03x next=%03x", q12, n12));
      check(n32 == ref_hybrid(q32, 32), $sformatf("N=32 q=%08x next=%08x", q32, n32));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
