// tb_pc_sweep: the program counter at every width from 8 to 32 bits, as pure MFSR PC
// and as hybrid PC (50 instances). This spans the PC widths studied for the method,
// including the 10-bit PCs of small 16-bit processors and the 30-bit word PC of a
// 32-bit processor.
//
// All instances share clock and control. Phase 1 resets them and counts with ENABLE
// high for 65536 cycles; every instance of up to 16 bits must come back to its reset
// address after exactly its cycle length (2^N-1 for the MFSR PC, 8*(2^(N-3)-1) for the
// hybrid PC) and not before, and no instance may come back early. Phase 2 applies
// random reset, load, enable and data. Every cycle each instance is compared with its
// own reference model, which steps the MFSR from the pc_pkg tap table.
module tb_pc_sweep;
  import pc_pkg::*;

  localparam int MINW = 8;
  localparam int MAXW = 32;
  localparam int NINST = 2 * (MAXW - MINW + 1);
  localparam int RUN1 = 65536;
  localparam int RUN2 = 20000;

  int checks   = 0;
  int failures = 0;

  logic        clk = 1'b0;
  logic        rst = 1'b1, load = 1'b0, enable = 1'b0;
  logic [31:0] data = '0;
  bit          phase1 = 1'b0;  // continuous count phase
  int          cyc = 0;

  always #5 clk = ~clk;

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

  function automatic logic [31:0] ref_next(input logic [31:0] v, input int n, input bit hyb);
    logic [31:0] hi;
    if (!hyb) return ref_mfsr(v, n);
    hi = v >> 3;
    if (v[2:0] == 3'd7) hi = ref_mfsr(hi, n - 3);
    return (hi << 3) | 32'(3'(v[2:0] + 3'd1));
  endfunction

  int first_return[NINST];
  int mismatches[NINST];

  for (genvar gw = MINW; gw <= MAXW; gw++) begin : g_w
    for (genvar gk = 0; gk < 2; gk++) begin : g_k
      localparam int W = gw;
      localparam bit HYB = (gk == 1);
      localparam int IDX = 2 * (gw - MINW) + gk;
      localparam logic [W-1:0] RV = HYB ? W'(8) : W'(1);
      logic [W-1:0] pc, expv;

      pc_circuit #(.N(W), .KIND(HYB ? PC_HYBRID : PC_MFSR)) dut (
        .clk, .rst, .load, .enable, .data(data[W-1:0]), .pc
      );

      initial begin
        first_return[IDX] = 0;
        mismatches[IDX]   = 0;
      end

      always @(posedge clk) begin
        if (rst)                 expv <= RV;
        else if (enable && load) expv <= data[W-1:0];
        else if (enable)         expv <= W'(ref_next(32'(expv), W, HYB));
      end

      always @(negedge clk) begin
        if (cyc > 0) begin
          if (pc != expv) mismatches[IDX]++;
          if (phase1 && !rst && first_return[IDX] == 0 && pc == RV) first_return[IDX] = cyc - 1;
        end
      end
    end
  end

  longint expect_len;
  int     w;
  bit     hyb;

  initial begin
    // Phase 1: reset, then count.
    @(negedge clk);
    rst = 1'b1;
    cyc = 1;
    @(negedge clk);
    rst = 1'b0;
    enable = 1'b1;
    phase1 = 1'b1;
    cyc = 1;
    repeat (RUN1) begin
      @(posedge clk);
      cyc++;
    end
    phase1 = 1'b0;
    // Phase 2: random control.
    repeat (RUN2) begin
      @(negedge clk);
      rst    = ($urandom_range(0, 199) == 0);
      load   = ($urandom_range(0, 7) == 0);
      enable = ($urandom_range(0, 9) < 8);
      data   = $urandom;
      if ($urandom_range(0, 15) == 0) data[2:0] = 3'd7;
      cyc++;
    end
    @(negedge clk);
    // Results.
    for (int i = 0; i < NINST; i++) begin
      w   = MINW + i / 2;
      hyb = (i % 2 == 1);
      checks++;
      if (mismatches[i] != 0) begin
        failures++;
        $display("FAIL: N=%0d %s: %0d cycles differ from the model", w,
                 hyb ? "hybrid" : "mfsr", mismatches[i]);
      end
      expect_len = hyb ? 8 * ((64'd1 << (w - 3)) - 1) : (64'd1 << w) - 1;
      checks++;
      if (expect_len <= RUN1) begin
        if (longint'(first_return[i]) != expect_len) begin
          failures++;
          $display("FAIL: N=%0d %s: cycle length %0d, expected %0d", w,
                   hyb ? "hybrid" : "mfsr", first_return[i], expect_len);
        end
      end else if (first_return[i] != 0) begin
        failures++;
        $display("FAIL: N=%0d %s: returned to reset after %0d steps", w,
                 hyb ? "hybrid" : "mfsr", first_return[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
