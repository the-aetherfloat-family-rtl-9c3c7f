// tb_af_mac: drives one AF8 MAC lane with random clr/en/operand/mode
// sequences and compares the accumulator after every clock edge with a
// cycle model built on the reference fma. This also checks the one-cycle
// latency: acc must hold the updated sum right after the edge that took the
// operands, and must hold still on cycles without en.
module tb_af_mac;
  import af8_ref_pkg::*;
  localparam int SR = 8;

  logic          clk = 0, rst_n = 1;
  logic          clr, en, mode;
  logic [7:0]    a, b, acc;
  logic [SR-1:0] rnd;
  logic          inexact, rounded_up, overflow, subnormal, far_align;
  logic [7:0]    model;
  int            checks = 0, failures = 0, n_clr = 0, n_hold = 0;

  af_mac #(.EW(4), .MW(3), .BIAS(7), .SR(SR)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .a(a), .b(b), .mode(mode), .rnd(rnd),
    .acc(acc), .inexact(inexact), .rounded_up(rounded_up), .overflow(overflow),
    .subnormal(subnormal), .far_align(far_align));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; mode = 0; a = 0; b = 0; rnd = 0;
    model = 8'h00;
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (acc !== 8'h00) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      clr  = ($urandom % 16) == 0;
      en   = ($urandom % 8) != 0;
      mode = 1'($urandom);
      rnd  = SR'($urandom);
      // operands near 1.0 keep sums in range most of the time
      a = ($urandom % 4 == 0) ? 8'($urandom) : 8'(8'h30 + ($urandom % 16));
      b = ($urandom % 4 == 0) ? 8'($urandom) : 8'(8'h30 + ($urandom % 16));
      if (en)       model = fma(a, b, clr ? 8'h00 : model, mode, int'(rnd), SR);
      else if (clr) model = 8'h00;
      if (clr) n_clr++;
      if (!en && !clr) n_hold++;
      @(posedge clk);
      #1;
      checks++;
      if (acc !== model) begin
        failures++;
        if (failures < 20) $display("FAIL cycle %0d: acc=%02h expected %02h", k, acc, model);
      end
    end
    if (n_clr == 0 || n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
