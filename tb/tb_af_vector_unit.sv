// tb_af_vector_unit: end-to-end test of the 16-lane vector unit at its
// default size and format (AF8).
//
// Phase 1, inference: several dot products per lane with nearest-even
// rounding, each started with acc_clr, followed by integer-ALU passes over the
// accumulators (ReLU, NaN filter, max-pool over lanes).
// Phase 2, training: gradient-style accumulation of updates far smaller than
// half a quantum of the accumulator, once with nearest-even (the updates
// vanish) and once with stochastic rounding from the shared LFSR (they move
// the sums). The testbench keeps its own copy of the LFSR and of every lane.
// Phase 3, exceptions: overflow to Inf, NaN propagation, subnormal results.
// Every accumulator is compared with the reference model after every cycle;
// counters record that each mechanism happened at least once.
module tb_af_vector_unit;
  import af8_ref_pkg::*;
  localparam int LANES = 16;
  localparam int SR    = 8;
  localparam logic [31:0] POLY = 32'h8020_0003;

  logic                    clk = 0, rst_n = 1;
  logic                    mac_en = 0, acc_clr = 0, lfsr_load = 0, alu_src_acc = 0;
  af_pkg::rnd_mode_e       rnd_mode = af_pkg::RND_NEAREST_EVEN;
  af_pkg::alu_op_e         alu_op = af_pkg::ALU_MAX;
  logic [LANES-1:0][7:0]   a = '0, b = '0, acc, alu_a = '0, alu_b = '0, alu_y;
  logic [LANES-1:0]        inexact, rounded_up, overflow, subnormal, far_align;
  logic [31:0]             lfsr_seed = 32'h0BAD_5EED, lfsr_state;
  logic [7:0]              pool_max;

  logic [7:0]              model [LANES];
  logic [31:0]             lfsr_model;
  int                      checks = 0, failures = 0;
  int n_clr = 0, n_rne = 0, n_sr = 0, n_sr_up = 0, n_rne_stall = 0, n_far = 0, n_sub = 0;
  int n_ovf = 0, n_nan = 0, n_relu_clear = 0, n_nanfilt = 0, n_pool = 0, n_switch = 0;

  af_vector_unit dut (
    .clk(clk), .rst_n(rst_n), .mac_en(mac_en), .acc_clr(acc_clr), .rnd_mode(rnd_mode),
    .a(a), .b(b), .acc(acc), .inexact(inexact), .rounded_up(rounded_up),
    .overflow(overflow), .subnormal(subnormal), .far_align(far_align),
    .lfsr_load(lfsr_load), .lfsr_seed(lfsr_seed), .lfsr_state(lfsr_state),
    .alu_op(alu_op), .alu_src_acc(alu_src_acc), .alu_a(alu_a), .alu_b(alu_b),
    .alu_y(alu_y), .pool_max(pool_max));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one MAC cycle on all lanes; operands already on a and b
  task automatic mac_cycle(input bit clr);
    logic [7:0] prev_acc [LANES];
    @(negedge clk);
    mac_en  = 1;
    acc_clr = clr;
    for (int i = 0; i < LANES; i++) begin
      prev_acc[i] = model[i];
      model[i]  = fma(a[i], b[i], clr ? 8'h00 : model[i], rnd_mode == af_pkg::RND_STOCHASTIC,
                      int'(lfsr_model[SR-1:0]), SR);
    end
    if (rnd_mode == af_pkg::RND_STOCHASTIC) begin
      lfsr_model = (lfsr_model >> 1) ^ (lfsr_model[0] ? POLY : 32'h0);
      n_sr++;
    end else n_rne++;
    if (clr) n_clr++;
    @(posedge clk);
    #1;
    mac_en  = 0;
    acc_clr = 0;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (acc[i] !== model[i]) begin
        failures++;
        if (failures < 20)
          $display("FAIL lane %0d: a=%02h b=%02h acc=%02h expected %02h", i, a[i], b[i], acc[i], model[i]);
      end
      if (far_align[i]) n_far++;
      if (subnormal[i]) n_sub++;
      if (overflow[i])  n_ovf++;
      if (decode(acc[i]).nan) n_nan++;
      if (rnd_mode == af_pkg::RND_STOCHASTIC && rounded_up[i] && acc[i] != prev_acc[i] && !clr)
        n_sr_up++;
      if (rnd_mode == af_pkg::RND_NEAREST_EVEN && inexact[i] && acc[i] == prev_acc[i] && !clr)
        n_rne_stall++;
    end
    checks++;
    if (lfsr_state !== lfsr_model) begin
      failures++;
      $display("FAIL lfsr %h expected %h", lfsr_state, lfsr_model);
    end
  endtask

  task automatic set_mode(input af_pkg::rnd_mode_e m);
    if (m != rnd_mode) n_switch++;
    rnd_mode = m;
  endtask

  function automatic logic [7:0] near_one();   // canonical codes in [1/4, 4)
    return 8'(8'h32 + ($urandom % 14));
  endfunction

  task automatic alu_checks();
    int best;
    @(negedge clk);
    alu_src_acc = 1;
    alu_op = af_pkg::ALU_RELU;
    #1;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (alu_y[i] !== (($signed(model[i]) > 0) ? model[i] : 8'h00)) failures++;
      if ($signed(model[i]) <= 0 && model[i] != 8'h00) n_relu_clear++;
    end
    alu_op = af_pkg::ALU_NANFILT;
    #1;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (alu_y[i] !== (decode(model[i]).nan ? 8'h00 : model[i])) failures++;
      if (decode(model[i]).nan) n_nanfilt++;
    end
    best = $signed(model[0]);
    for (int i = 1; i < LANES; i++) if ($signed(model[i]) > best) best = $signed(model[i]);
    checks++;
    if ($signed(pool_max) != best) failures++;
    n_pool++;
    alu_src_acc = 0;
  endtask

  initial begin
    for (int i = 0; i < LANES; i++) model[i] = 8'h00;
    lfsr_model = lfsr_seed;
    #1 rst_n = 0;
    #12 rst_n = 1;
    @(negedge clk);
    lfsr_load = 1;
    @(negedge clk);
    lfsr_load = 0;
    checks++;
    if (lfsr_state !== lfsr_seed) failures++;

    // Phase 1: inference dot products, mixed signs, nearest-even
    set_mode(af_pkg::RND_NEAREST_EVEN);
    for (int dp = 0; dp < 8; dp++) begin
      for (int k = 0; k < 32; k++) begin
        for (int i = 0; i < LANES; i++) begin
          a[i] = near_one() ^ {8{1'($urandom)}};
          b[i] = near_one();
          if ($urandom % 16 == 0) b[i] = 8'h01;              // subnormal operand
        end
        mac_cycle(k == 0);
      end
      alu_checks();
    end

    // Phase 2: small updates onto an accumulator of 1.0, first RNE then SR
    for (int pass = 0; pass < 2; pass++) begin
      set_mode(pass == 0 ? af_pkg::RND_NEAREST_EVEN : af_pkg::RND_STOCHASTIC);
      for (int i = 0; i < LANES; i++) begin a[i] = 8'h3a; b[i] = 8'h3a; end
      mac_cycle(1);                                    // acc = 1.0
      for (int k = 0; k < 64; k++) begin
        for (int i = 0; i < LANES; i++) begin
          a[i] = 8'(8'h2a + ($urandom % 2));           // 1/16 .. 3/32
          b[i] = 8'(8'h32 + ($urandom % 4));           // 1/4 .. 5/8
        end
        mac_cycle(0);
      end
    end

    // Phase 3: exceptions and range limits
    set_mode(af_pkg::RND_NEAREST_EVEN);
    for (int i = 0; i < LANES; i++) begin a[i] = 8'h77; b[i] = 8'h77; end
    mac_cycle(1);                                      // overflow to Inf
    for (int i = 0; i < LANES; i++) begin a[i] = (i % 2) ? 8'h7f : 8'h3a; b[i] = 8'h3a; end
    mac_cycle(1);                                      // NaN in odd lanes
    alu_checks();
    for (int i = 0; i < LANES; i++) begin a[i] = 8'h01; b[i] = 8'h3a; end
    mac_cycle(1);                                      // subnormal 2^-13
    for (int i = 0; i < LANES; i++) begin a[i] = 8'h01; b[i] = 8'h0a; end
    mac_cycle(0);                                      // far below: flushed
    // Phase 4: random traffic in both modes
    for (int k = 0; k < 400; k++) begin
      set_mode(($urandom % 2) ? af_pkg::RND_STOCHASTIC : af_pkg::RND_NEAREST_EVEN);
      for (int i = 0; i < LANES; i++) begin a[i] = 8'($urandom); b[i] = 8'($urandom); end
      mac_cycle(($urandom % 8) == 0);
    end

    $display("clr=%0d rne=%0d sr=%0d sr_up=%0d rne_stall=%0d far=%0d sub=%0d ovf=%0d nan=%0d",
             n_clr, n_rne, n_sr, n_sr_up, n_rne_stall, n_far, n_sub, n_ovf, n_nan);
    $display("relu_clear=%0d nanfilt=%0d pool=%0d mode_switch=%0d",
             n_relu_clear, n_nanfilt, n_pool, n_switch);
    if (n_clr == 0)        begin failures++; $display("never: accumulator clear"); end
    if (n_sr_up == 0)      begin failures++; $display("never: stochastic round-up"); end
    if (n_rne_stall == 0)  begin failures++; $display("never: vanishing update under RNE"); end
    if (n_far == 0)        begin failures++; $display("never: far alignment flush"); end
    if (n_sub == 0)        begin failures++; $display("never: subnormal result"); end
    if (n_ovf == 0)        begin failures++; $display("never: overflow to Inf"); end
    if (n_nan == 0)        begin failures++; $display("never: NaN result"); end
    if (n_relu_clear == 0) begin failures++; $display("never: ReLU clearing a negative"); end
    if (n_nanfilt == 0)    begin failures++; $display("never: NaN filtered"); end
    if (n_switch == 0)     begin failures++; $display("never: rounding mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
