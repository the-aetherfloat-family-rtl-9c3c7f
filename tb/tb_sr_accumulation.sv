// tb_sr_accumulation: the vanishing-update experiment behind stochastic
// rounding, run on AF16 vector units.
//
// Every lane starts at 1.0 and adds 512 updates of (1 + i/16) * 2^-9 (lane i),
// each far below half a unit in the last place of the accumulator (2^-7), so
// the exact result is 2 + i/16. Four runs with different LFSR seeds:
//   - nearest-even (4-stage aligner): every update is lost, the sums stall
//     at 1.0;
//   - stochastic, one shared LFSR word per 16 lanes, 4-stage aligner: the
//     sums must track the exact result, and as closely as an "ideal"
//     software SR that draws an independent random word per lane and step
//     (computed with the reference model);
//   - stochastic with the default 2-stage aligner: the updates lie 5 digits
//     below the accumulator, outside its reach, so they only act as an
//     epsilon and the sums stay at 1.0 as well.
module tb_sr_accumulation;
  import af_ref_pkg::*;

  localparam int LANES = 16;
  localparam int SR    = 8;
  localparam int STEPS = 512;
  localparam int RUNS  = 4;
  localparam logic [15:0] ONE = 16'h3f40;               // E=63, M=64
  typedef af_model #(7, 8, 63, SR, 16) m16;

  logic                    clk = 0, rst_n = 1;
  logic                    mac_en = 0, acc_clr = 0, lfsr_load = 0;
  logic [LANES-1:0][15:0]  a = '0, b = '0;
  logic [LANES-1:0][15:0]  acc_rne, acc_sr, acc_sr2, unused_y [3];
  logic [LANES-1:0]        unused_f [3][5];
  logic [31:0]             lfsr_seed = 32'h1, unused_state [3];
  logic [15:0]             unused_pool [3];
  logic [15:0]             ideal [LANES];
  int                      checks = 0, failures = 0;

  af_vector_unit #(.LANES(LANES), .SR(SR), .EW(7), .MW(8), .BIAS(63), .ALIGN_STAGES(4)) u_rne (
    .clk(clk), .rst_n(rst_n), .mac_en(mac_en), .acc_clr(acc_clr),
    .rnd_mode(af_pkg::RND_NEAREST_EVEN), .a(a), .b(b), .acc(acc_rne),
    .inexact(unused_f[0][0]), .rounded_up(unused_f[0][1]), .overflow(unused_f[0][2]),
    .subnormal(unused_f[0][3]), .far_align(unused_f[0][4]),
    .lfsr_load(lfsr_load), .lfsr_seed(lfsr_seed), .lfsr_state(unused_state[0]),
    .alu_op(af_pkg::ALU_MAX), .alu_src_acc(1'b1), .alu_a('0), .alu_b('0),
    .alu_y(unused_y[0]), .pool_max(unused_pool[0]));

  af_vector_unit #(.LANES(LANES), .SR(SR), .EW(7), .MW(8), .BIAS(63), .ALIGN_STAGES(4)) u_sr (
    .clk(clk), .rst_n(rst_n), .mac_en(mac_en), .acc_clr(acc_clr),
    .rnd_mode(af_pkg::RND_STOCHASTIC), .a(a), .b(b), .acc(acc_sr),
    .inexact(unused_f[1][0]), .rounded_up(unused_f[1][1]), .overflow(unused_f[1][2]),
    .subnormal(unused_f[1][3]), .far_align(unused_f[1][4]),
    .lfsr_load(lfsr_load), .lfsr_seed(lfsr_seed), .lfsr_state(unused_state[1]),
    .alu_op(af_pkg::ALU_MAX), .alu_src_acc(1'b1), .alu_a('0), .alu_b('0),
    .alu_y(unused_y[1]), .pool_max(unused_pool[1]));

  af_vector_unit #(.LANES(LANES), .SR(SR), .EW(7), .MW(8), .BIAS(63)) u_sr2 (
    .clk(clk), .rst_n(rst_n), .mac_en(mac_en), .acc_clr(acc_clr),
    .rnd_mode(af_pkg::RND_STOCHASTIC), .a(a), .b(b), .acc(acc_sr2),
    .inexact(unused_f[2][0]), .rounded_up(unused_f[2][1]), .overflow(unused_f[2][2]),
    .subnormal(unused_f[2][3]), .far_align(unused_f[2][4]),
    .lfsr_load(lfsr_load), .lfsr_seed(lfsr_seed), .lfsr_state(unused_state[2]),
    .alu_op(af_pkg::ALU_MAX), .alu_src_acc(1'b1), .alu_a('0), .alu_b('0),
    .alu_y(unused_y[2]), .pool_max(unused_pool[2]));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value of a positive AF16 code: M/64 * 4^(max(E,1)-63)
  function automatic real val(logic [15:0] x);
    int e = int'(x[14:8]);
    if (e == 0) e = 1;
    return real'(x[7:0]) / 64.0 * (4.0 ** (e - 63));
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic mac_cycle(input bit clr);
    @(negedge clk);
    mac_en  = 1;
    acc_clr = clr;
    @(posedge clk);
    #1;
    mac_en  = 0;
    acc_clr = 0;
  endtask

  initial begin
    real ex, e_sr, e_ideal, e_rne, sum_ex, sum_sr, sum_ideal, worst;
    sum_ex = 0.0; sum_sr = 0.0; sum_ideal = 0.0; worst = 0.0;
    #1 rst_n = 0;
    #9 rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      @(negedge clk);
      lfsr_seed = 32'h1357_9bdf + 32'(run) * 32'h9e37_79b9;
      lfsr_load = 1;
      @(negedge clk);
      lfsr_load = 0;
      // load 1.0 into every accumulator
      for (int i = 0; i < LANES; i++) begin
        a[i] = ONE;
        b[i] = ONE;
        ideal[i] = ONE;
      end
      mac_cycle(1);
      for (int i = 0; i < LANES; i++) begin
        check(acc_rne[i] == ONE && acc_sr[i] == ONE && acc_sr2[i] == ONE, "load 1.0");
        a[i] = 16'h3a80 + 16'(8 * i);                     // E=58, M=128+8i
      end
      for (int k = 0; k < STEPS; k++) begin
        mac_cycle(0);
        for (int i = 0; i < LANES; i++)
          ideal[i] = m16::fma(a[i], b[i], ideal[i], 1, int'($urandom % (1 << SR)));
      end
      for (int i = 0; i < LANES; i++) begin
        ex = 2.0 + real'(i) / 16.0;
        e_sr    = (val(acc_sr[i]) - ex) / ex;
        e_ideal = (val(ideal[i]) - ex) / ex;
        e_rne   = (val(acc_rne[i]) - ex) / ex;
        sum_ex += ex;
        sum_sr += val(acc_sr[i]);
        sum_ideal += val(ideal[i]);
        if ((e_sr < 0 ? -e_sr : e_sr) > worst) worst = (e_sr < 0 ? -e_sr : e_sr);
        check(acc_rne[i] == ONE, $sformatf("nearest-even lane %0d did not stall", i));
        check(acc_sr2[i] == ONE, $sformatf("2-stage SR lane %0d moved", i));
        check(e_rne < -0.45, "nearest-even error");
        check(e_sr < 0.12 && e_sr > -0.12, $sformatf("SR lane %0d error %f", i, e_sr));
        if (run == 0 && i % 5 == 0)
          $display("lane %2d exact %.4f  RNE %.4f  SR(shared) %.4f  SR(ideal) %.4f  SR(2-stage) %.4f",
                   i, ex, val(acc_rne[i]), val(acc_sr[i]), val(ideal[i]), val(acc_sr2[i]));
      end
    end
    e_sr    = (sum_sr - sum_ex) / sum_ex;
    e_ideal = (sum_ideal - sum_ex) / sum_ex;
    $display("mean relative error over %0d sums: SR(shared) %.4f  SR(ideal) %.4f  worst SR(shared) lane %.4f",
             RUNS * LANES, e_sr, e_ideal, worst);
    check(e_sr < 0.02 && e_sr > -0.02, "shared SR mean error");
    check(e_ideal < 0.02 && e_ideal > -0.02, "ideal SR mean error");
    check((e_sr - e_ideal) < 0.02 && (e_ideal - e_sr) < 0.02, "shared SR differs from ideal SR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
