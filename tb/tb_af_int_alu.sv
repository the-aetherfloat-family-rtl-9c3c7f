// tb_af_int_alu: checks the integer bypass ALU on random AF8 codes.
// Each result is checked against the decoded values: MAX/MIN must return an
// operand whose value is the larger/smaller one, ReLU must return the operand
// when its value is positive and +0 otherwise, the NaN filter must clear NaN
// codes only, and pool_max must have the largest value of the vector. Codes
// used are canonical and not NaN where values are compared.
module tb_af_int_alu;
  import af8_ref_pkg::*;
  localparam int LANES = 16;

  af_pkg::alu_op_e        op;
  logic [LANES-1:0][7:0]  a, b, y;
  logic [7:0]             pool_max;
  int                     checks = 0, failures = 0;

  af_int_alu #(.N(8), .LANES(LANES)) dut (.op(op), .a(a), .b(b), .y(y), .pool_max(pool_max));

  function automatic logic [7:0] rand_code();
    logic [7:0] x;
    dec_t d;
    do begin
      x = 8'($urandom);
      d = decode(x);
    end while (d.nan || (d.e < 15 && ((d.e == 0) != (d.m < 2))));
    return x;
  endfunction

  // value with Inf mapped beyond every finite value
  function automatic val_t v(logic [7:0] x);
    dec_t d = decode(x);
    if (d.inf) return d.s ? -(val_t'(1) <<< 120) : (val_t'(1) <<< 120);
    return value(x);
  endfunction

  task automatic expect_true(input string what, input bit cond, input int lane);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s lane %0d a=%02h b=%02h y=%02h", what, lane, a[lane], b[lane], y[lane]);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    val_t best;
    for (int k = 0; k < 3000; k++) begin
      for (int i = 0; i < LANES; i++) begin
        a[i] = rand_code();
        b[i] = rand_code();
      end
      op = af_pkg::ALU_MAX; #1;
      for (int i = 0; i < LANES; i++)
        expect_true("max", (y[i] == a[i] || y[i] == b[i]) && v(y[i]) >= v(a[i]) && v(y[i]) >= v(b[i]), i);
      best = v(a[0]);
      for (int i = 1; i < LANES; i++) if (v(a[i]) > best) best = v(a[i]);
      expect_true("pool", v(pool_max) == best, 0);
      op = af_pkg::ALU_MIN; #1;
      for (int i = 0; i < LANES; i++)
        expect_true("min", (y[i] == a[i] || y[i] == b[i]) && v(y[i]) <= v(a[i]) && v(y[i]) <= v(b[i]), i);
      op = af_pkg::ALU_RELU; #1;
      for (int i = 0; i < LANES; i++)
        expect_true("relu", (v(a[i]) > 0) ? (y[i] == a[i]) : (y[i] == 8'h00), i);
      op = af_pkg::ALU_GT; #1;
      for (int i = 0; i < LANES; i++)
        if (v(a[i]) != v(b[i])) expect_true("gt", y[i] == ((v(a[i]) > v(b[i])) ? 8'd1 : 8'd0), i);
      // NaN filter: inject NaNs into some lanes
      for (int i = 0; i < LANES; i++)
        if ($urandom % 4 == 0) a[i] = ($urandom % 2) ? 8'h7f : 8'h80;
      op = af_pkg::ALU_NANFILT; #1;
      for (int i = 0; i < LANES; i++)
        expect_true("nanfilt", decode(a[i]).nan ? (y[i] == 8'h00) : (y[i] == a[i]), i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
