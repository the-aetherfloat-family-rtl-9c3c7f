// tb_sort_workload: sorts 1,000,012 random AF16 codes with the integer ALU
// as the only comparator and checks that the result is in value order.
//
// A bottom-up merge sort runs up to 16 merges at once, one per lane of an
// af_int_alu (N = 16) set to ALU_GT; every ordering decision comes from the
// lane's signed integer compare of the raw codes, with no floating-point
// decode. Afterwards each neighbouring pair is decoded to its real value and
// counted as a monotonicity error if the value goes down (Inf and NaN are
// placed at the ends: -NaN < -Inf < finite < +Inf < +NaN, as their codes sort).
// The sorted array must also be a permutation of the input. The codes are
// random canonical AF16 codes (all signs, subnormals, both zeros, Inf, NaN).
module tb_sort_workload;
  localparam int N     = 16;
  localparam int LANES = 16;
  localparam int NELEM = 1000012;

  af_pkg::alu_op_e          op = af_pkg::ALU_GT;
  logic [LANES-1:0][N-1:0]  a = '0, b = '0, y;
  logic [N-1:0]             pool_max;
  logic [N-1:0]             src [], dst [], orig [];
  int                       checks = 0, failures = 0;
  int                       evals = 0;

  af_int_alu #(.N(N), .LANES(LANES)) dut (.op(op), .a(a), .b(b), .y(y), .pool_max(pool_max));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit canonical(logic [N-1:0] x);
    logic [N-2:0] u = x[N-1] ? ~x[N-2:0] : x[N-2:0];
    logic [6:0]   e = u[14:8];
    logic [1:0]   lp = u[7:6];
    if (e == 7'h7f) return 1'b1;
    return (e == 0) ? (lp == 2'b00) : (lp != 2'b00);
  endfunction

  // real value; Inf as +-1e300, NaN as +-2e300 (their place in code order)
  function automatic real val(logic [N-1:0] x);
    logic [N-2:0] u = x[N-1] ? ~x[N-2:0] : x[N-2:0];
    int  e = int'(u[14:8]);
    int  m = int'(u[7:0]);
    real v;
    if (e == 127) v = (m == 255) ? 2.0e300 : 1.0e300;
    else          v = real'(m) / 64.0 * (4.0 ** ((e == 0 ? 1 : e) - 63));
    return x[N-1] ? -v : v;
  endfunction

  initial begin
    int unsigned lo [LANES], mid [LANES], hi [LANES], i [LANES], j [LANES], k [LANES];
    bit          busy, cmp [LANES];
    int          n_merge, errors, n_special, n_sub, n_zero, n_neg;
    logic [N-1:0] x;
    int          hist [];

    src  = new[NELEM];
    dst  = new[NELEM];
    orig = new[NELEM];
    n_special = 0; n_sub = 0; n_zero = 0; n_neg = 0;
    for (int n = 0; n < NELEM; n++) begin
      do x = N'($urandom); while (!canonical(x));
      src[n] = x;
      orig[n] = x;
      if ((x[N-1] ? ~x[14:8] : x[14:8]) == 7'h7f) n_special++;
      if ((x[N-1] ? ~x[14:8] : x[14:8]) == 7'h00) n_sub++;
      if (val(x) == 0.0) n_zero++;
      if (x[N-1]) n_neg++;
    end

    evals = 0;
    for (int unsigned w = 1; w < NELEM; w = w * 2) begin
      n_merge = int'((NELEM + 2 * w - 1) / (2 * w));
      for (int g = 0; g < n_merge; g += LANES) begin
        for (int l = 0; l < LANES; l++) begin
          lo[l]  = (g + l < n_merge) ? unsigned'(g + l) * 2 * w : NELEM;
          mid[l] = (lo[l] + w < NELEM) ? lo[l] + w : NELEM;
          hi[l]  = (lo[l] + 2 * w < NELEM) ? lo[l] + 2 * w : NELEM;
          i[l] = lo[l];
          j[l] = mid[l];
          k[l] = lo[l];
        end
        busy = 1'b1;
        while (busy) begin
          // present the heads of both runs to every lane that must choose
          for (int l = 0; l < LANES; l++) begin
            cmp[l] = (i[l] < mid[l]) && (j[l] < hi[l]);
            a[l] = cmp[l] ? src[i[l]] : '0;
            b[l] = cmp[l] ? src[j[l]] : '0;
          end
          evals = evals + 1;
          #1;
          busy = 1'b0;
          for (int l = 0; l < LANES; l++) begin
            if (k[l] < hi[l]) begin
              // take the right head only if the left one is greater (stable)
              if (j[l] < hi[l] && (i[l] >= mid[l] || (cmp[l] && y[l][0]))) begin
                dst[k[l]] = src[j[l]];
                j[l]++;
              end else begin
                dst[k[l]] = src[i[l]];
                i[l]++;
              end
              k[l]++;
            end
            if (k[l] < hi[l]) busy = 1'b1;
          end
        end
      end
      src = dst;
      dst = new[NELEM];
      $display("merge pass %0d done (runs of %0d), %0d ALU evaluations so far", $clog2(2 * w), 2 * w, evals);
    end

    // value order of the result
    errors = 0;
    for (int n = 0; n + 1 < NELEM; n++) begin
      checks++;
      if (val(src[n]) > val(src[n + 1])) begin
        errors++;
        failures++;
        if (errors < 10) $display("FAIL order at %0d: %04h then %04h", n, src[n], src[n + 1]);
      end
    end
    // permutation of the input: every code occurs as often as in the input
    hist = new[1 << N];
    foreach (orig[n]) hist[orig[n]]++;
    foreach (src[n]) hist[src[n]]--;
    checks++;
    foreach (hist[c])
      if (hist[c] != 0) begin
        failures++;
        $display("FAIL not a permutation of the input (code %04h)", c);
        break;
      end
    if (n_special == 0 || n_sub == 0 || n_zero == 0 || n_neg == 0) begin
      failures++;
      $display("FAIL input lacks special, subnormal, zero or negative codes");
    end
    if (evals == 0) failures++;
    $display("sorted %0d codes (%0d negative, %0d zero, %0d subnormal, %0d Inf/NaN) with %0d ALU evaluations",
             NELEM, n_neg, n_zero, n_sub, n_special, evals);
    $display("first %04h last %04h, monotonicity errors: %0d", src[0], src[NELEM - 1], errors);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
