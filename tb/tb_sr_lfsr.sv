// tb_sr_lfsr: checks the shared stochastic-rounding LFSR.
// After reset the state is the seed. The output bit stream (state bit 0)
// must obey the linear recurrence of the characteristic polynomial,
// b[n+32] = b[n] ^ b[n+10] ^ b[n+30] ^ b[n+31], checked here instead of the
// shift-register formula. The state never becomes zero, holds without step,
// loads a new seed, and rnd is the low byte of the state.
module tb_sr_lfsr;
  localparam logic [31:0] SEED = 32'h1357_9BDF;
  logic        clk = 0, rst_n = 1, step = 0, load = 0;
  logic [31:0] seed = 0, state;
  logic [7:0]  rnd;
  bit          bits [4096];
  int          checks = 0, failures = 0;

  sr_lfsr #(.SR(8), .SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .step(step), .load(load),
    .seed(seed), .state(state), .rnd(rnd));

  always #5 clk = ~clk;

  task automatic expect_true(input string what, input bit cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (state=%h)", what, state);
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
    logic [31:0] held;
    #1 rst_n = 0;
    #1;
    expect_true("reset to seed", state == SEED);
    @(negedge clk); rst_n = 1; step = 1;
    for (int n = 0; n < 4096; n++) begin
      bits[n] = state[0];
      expect_true("non-zero", state != 0);
      expect_true("rnd is low byte", rnd == state[7:0]);
      @(negedge clk);
    end
    for (int n = 0; n + 32 < 4096; n++)
      expect_true("recurrence", bits[n+32] == (bits[n] ^ bits[n+10] ^ bits[n+30] ^ bits[n+31]));
    step = 0; held = state;
    repeat (5) @(negedge clk);
    expect_true("hold", state == held);
    load = 1; seed = 32'hDEAD_BEEF;
    @(negedge clk);
    expect_true("load", state == 32'hDEAD_BEEF);
    seed = 32'h0;
    @(negedge clk);
    expect_true("zero seed refused", state == SEED);
    load = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
