// tb_mfsr_next: self-checking testbench of mfsr_next for every width 4..32.
//
// For each width the testbench reads the state-transition matrix M out of the
// hardware by applying the N unit vectors, checks that the circuit is linear and maps
// zero to zero, and then proves maximum cycle algebraically: M^(2^N-1) = I and
// M^((2^N-1)/p) != I for every prime p dividing 2^N-1 (found by trial division here).
// It also checks the MFSR structure rules: at most two inputs per next-state bit, at
// most two loads per state bit, at most two XOR gates. Widths up to 16 are in addition
// stepped through their whole cycle, and the 8-bit circuit is compared, for all 256
// states, with the equations of the paper's 8-bit MFSR drawing.
module tb_mfsr_next;
  localparam int MINW = 4;
  localparam int MAXW = 32;

  int checks   = 0;
  int failures = 0;
  int done_cnt = 0;

  typedef logic [31:0] mat_t[32];  // column j = image of unit vector j

  function automatic mat_t mat_mul(input mat_t a, input mat_t b, input int n);
    mat_t r;
    for (int j = 0; j < n; j++) begin
      r[j] = '0;
      for (int k = 0; k < n; k++) if (b[j][k]) r[j] ^= a[k];
    end
    for (int j = n; j < 32; j++) r[j] = '0;
    return r;
  endfunction

  function automatic mat_t mat_pow(input mat_t m, input longint unsigned e, input int n);
    mat_t r, base;
    base = m;
    for (int j = 0; j < 32; j++) r[j] = (j < n) ? (32'd1 << j) : 32'd0;
    while (e != 0) begin
      if (e[0]) r = mat_mul(base, r, n);
      base = mat_mul(base, base, n);
      e >>= 1;
    end
    return r;
  endfunction

  function automatic bit is_identity(input mat_t m, input int n);
    for (int j = 0; j < n; j++) if (m[j] != (32'd1 << j)) return 1'b0;
    return 1'b1;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  for (genvar gw = MINW; gw <= MAXW; gw++) begin : g_w
    localparam int W = gw;
    logic [W-1:0] q, nx;

    mfsr_next #(.N(W)) dut (.q(q), .next(nx));

    initial begin : run
      mat_t            m, p;
      longint unsigned order, rest, f;
      int              xors, cnt;
      logic [W-1:0]    a, b, na, nb, s;
      bit              ok;
      #(100 * (W - MINW) + 1);
      // Matrix of the circuit.
      for (int j = 0; j < W; j++) begin
        q = W'(1) << j;
        #1;
        m[j] = 32'(nx);
      end
      for (int j = W; j < 32; j++) m[j] = '0;
      q = '0;
      #1;
      check(nx == '0, $sformatf("W=%0d zero state must map to zero", W));
      // Linearity on random pairs.
      for (int t = 0; t < 16; t++) begin
        a = W'({$urandom, $urandom});
        b = W'({$urandom, $urandom});
        q = a;     #1; na = nx;
        q = b;     #1; nb = nx;
        q = a ^ b; #1;
        check(nx == (na ^ nb), $sformatf("W=%0d next is not linear", W));
      end
      // Structure: fan-in (row weight), fan-out (column weight), XOR count.
      xors = 0;
      for (int i = 0; i < W; i++) begin
        cnt = 0;
        for (int j = 0; j < W; j++) cnt += int'(m[j][i]);
        check(cnt >= 1 && cnt <= 2, $sformatf("W=%0d bit %0d fan-in %0d", W, i, cnt));
        if (cnt == 2) xors++;
      end
      for (int j = 0; j < W; j++)
        check($countones(m[j]) >= 1 && $countones(m[j]) <= 2,
              $sformatf("W=%0d state bit %0d fan-out %0d", W, j, $countones(m[j])));
      check(xors <= 2, $sformatf("W=%0d uses %0d XOR gates", W, xors));
      // Maximum cycle: order of M is exactly 2^W-1.
      order = (64'd1 << W) - 1;
      check(is_identity(mat_pow(m, order, W), W), $sformatf("W=%0d M^(2^N-1) != I", W));
      rest = order;
      f = 2;
      while (f * f <= rest) begin
        if (rest % f == 0) begin
          check(!is_identity(mat_pow(m, order / f, W), W),
                $sformatf("W=%0d order divides (2^N-1)/%0d", W, f));
          while (rest % f == 0) rest /= f;
        end
        f++;
      end
      if (rest > 1)
        check(!is_identity(mat_pow(m, order / rest, W), W),
              $sformatf("W=%0d order divides (2^N-1)/%0d", W, rest));
      // Direct walk of the whole cycle for small widths.
      if (W <= 16) begin
        s = W'(1);
        q = s;
        ok = 1'b1;
        for (longint unsigned k = 1; k <= order; k++) begin
          #1;
          if (nx == '0 || (nx == s && k != order)) ok = 1'b0;
          q = nx;
        end
        #1;
        check(ok && q == s, $sformatf("W=%0d walk does not return after 2^N-1 steps", W));
      end
      // The 8-bit counter of the paper's figure, stage 0 leftmost.
      if (W == 8) begin
        for (int v = 0; v < 256; v++) begin
          q = W'(v);
          #1;
          a[0] = q[7];
          a[1] = q[0] ^ q[3];
          a[2] = q[1];
          a[3] = q[2];
          a[4] = q[3];
          a[5] = q[4] ^ q[6];
          a[6] = q[5];
          a[7] = q[6];
          check(nx == a, $sformatf("W=8 state %02x: next %02x, figure gives %02x", v, nx, a));
        end
      end
      done_cnt++;
    end
  end

  initial begin
    wait (done_cnt == MAXW - MINW + 1);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #50_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
