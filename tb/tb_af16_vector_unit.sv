// tb_af16_vector_unit: the vector unit built for AF16 (EW=7, MW=8, bias 63),
// checked against the format-generic reference model. It uses a 4-stage
// aligner (reach 0..15 digits), the width at which stochastic rounding sees
// every update that can move the AF16 accumulator.
//
// Dot products near 1.0 in both rounding modes, small updates that vanish
// under nearest-even and move under stochastic rounding, overflow, NaN and
// subnormal cases, then random codes over the whole 16-bit space. Every
// accumulator and the LFSR state are compared after every cycle.
module tb_af16_vector_unit;
  import af_ref_pkg::*;
  localparam int LANES = 16;
  localparam int SR    = 8;
  localparam logic [31:0] POLY = 32'h8020_0003;
  typedef af_model #(7, 8, 63, SR, 16) m16;

  logic                    clk = 0, rst_n = 1;
  logic                    mac_en = 0, acc_clr = 0, lfsr_load = 0, alu_src_acc = 0;
  af_pkg::rnd_mode_e       rnd_mode = af_pkg::RND_NEAREST_EVEN;
  af_pkg::alu_op_e         alu_op = af_pkg::ALU_RELU;
  logic [LANES-1:0][15:0]  a = '0, b = '0, acc, alu_a = '0, alu_b = '0, alu_y;
  logic [LANES-1:0]        inexact, rounded_up, overflow, subnormal, far_align;
  logic [31:0]             lfsr_seed = 32'h0BAD_5EED, lfsr_state;
  logic [15:0]             pool_max;

  logic [15:0]             model [LANES];
  logic [31:0]             lfsr_model;
  int                      checks = 0, failures = 0;
  int n_sr_up = 0, n_rne_stall = 0, n_far = 0, n_sub = 0, n_ovf = 0, n_relu = 0;

  af_vector_unit #(.LANES(LANES), .SR(SR), .EW(7), .MW(8), .BIAS(63), .ALIGN_STAGES(4)) dut (
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

  task automatic mac_cycle(input bit clr);
    logic [15:0] prev_acc [LANES];
    @(negedge clk);
    mac_en  = 1;
    acc_clr = clr;
    for (int i = 0; i < LANES; i++) begin
      prev_acc[i] = model[i];
      model[i] = m16::fma(a[i], b[i], clr ? 16'h0000 : model[i],
                          rnd_mode == af_pkg::RND_STOCHASTIC, int'(lfsr_model[SR-1:0]));
    end
    if (rnd_mode == af_pkg::RND_STOCHASTIC)
      lfsr_model = (lfsr_model >> 1) ^ (lfsr_model[0] ? POLY : 32'h0);
    @(posedge clk);
    #1;
    mac_en  = 0;
    acc_clr = 0;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (acc[i] !== model[i]) begin
        failures++;
        if (failures < 20)
          $display("FAIL lane %0d: a=%04h b=%04h acc=%04h expected %04h", i, a[i], b[i], acc[i], model[i]);
      end
      if (far_align[i]) n_far++;
      if (subnormal[i]) n_sub++;
      if (overflow[i])  n_ovf++;
      if (!clr && rnd_mode == af_pkg::RND_STOCHASTIC && rounded_up[i] && acc[i] != prev_acc[i]) n_sr_up++;
      if (!clr && rnd_mode == af_pkg::RND_NEAREST_EVEN && inexact[i] && acc[i] == prev_acc[i]) n_rne_stall++;
    end
    checks++;
    if (lfsr_state !== lfsr_model) failures++;
    // ReLU over the accumulators through the integer ALU
    alu_src_acc = 1;
    #1;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (alu_y[i] !== (($signed(model[i]) > 0) ? model[i] : 16'h0000)) failures++;
      if ($signed(model[i]) < -1) n_relu++;
    end
    alu_src_acc = 0;
  endtask

  // canonical codes in [1/4, 4): E = 62 or 63, M in 64..255
  function automatic logic [15:0] near_one();
    return {1'b0, 7'(62 + ($urandom % 2)), 8'(64 + ($urandom % 192))};
  endfunction

  initial begin
    for (int i = 0; i < LANES; i++) model[i] = 16'h0000;
    lfsr_model = lfsr_seed;
    #1 rst_n = 0;
    #12 rst_n = 1;
    @(negedge clk);
    lfsr_load = 1;
    @(negedge clk);
    lfsr_load = 0;

    for (int dp = 0; dp < 4; dp++) begin
      rnd_mode = (dp % 2) ? af_pkg::RND_STOCHASTIC : af_pkg::RND_NEAREST_EVEN;
      for (int k = 0; k < 32; k++) begin
        for (int i = 0; i < LANES; i++) begin
          a[i] = near_one() ^ {16{1'($urandom)}};
          b[i] = near_one();
        end
        mac_cycle(k == 0);
      end
    end
    // small updates: 1.0 + products about 2^-9, below half a quantum (2^-7)
    for (int pass = 0; pass < 2; pass++) begin
      rnd_mode = pass ? af_pkg::RND_STOCHASTIC : af_pkg::RND_NEAREST_EVEN;
      for (int i = 0; i < LANES; i++) begin a[i] = 16'h3f40; b[i] = 16'h3f40; end
      mac_cycle(1);
      for (int k = 0; k < 32; k++) begin
        for (int i = 0; i < LANES; i++) begin
          a[i] = {1'b0, 7'd59, 8'(64 + ($urandom % 64))};
          b[i] = near_one();
        end
        mac_cycle(0);
      end
    end
    // overflow, NaN, subnormal
    rnd_mode = af_pkg::RND_NEAREST_EVEN;
    for (int i = 0; i < LANES; i++) begin a[i] = 16'h7eff; b[i] = 16'h7eff; end
    mac_cycle(1);
    for (int i = 0; i < LANES; i++) begin a[i] = (i % 2) ? 16'h7fff : 16'h3f40; b[i] = 16'h3f40; end
    mac_cycle(1);
    for (int i = 0; i < LANES; i++) begin a[i] = 16'h0001; b[i] = 16'h3f40; end
    mac_cycle(1);
    for (int k = 0; k < 150; k++) begin
      rnd_mode = ($urandom % 2) ? af_pkg::RND_STOCHASTIC : af_pkg::RND_NEAREST_EVEN;
      for (int i = 0; i < LANES; i++) begin a[i] = 16'($urandom); b[i] = 16'($urandom); end
      mac_cycle(($urandom % 8) == 0);
    end

    $display("sr_up=%0d rne_stall=%0d far=%0d sub=%0d ovf=%0d relu=%0d",
             n_sr_up, n_rne_stall, n_far, n_sub, n_ovf, n_relu);
    if (n_sr_up == 0 || n_rne_stall == 0 || n_far == 0 || n_sub == 0 || n_ovf == 0 || n_relu == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
