// tb_af_align: random check of the 2-stage base-4 aligner.
// Expected: for d <= 3, y = x / 4^d (integer division) and sticky set when
// the remainder is non-zero; for d >= 4, y = 0 and sticky = (x != 0).
// A second, 4-stage instance is checked the same way with the limit at 16.
module tb_af_align;
  localparam int W = 24;
  logic [W-1:0] x, y;
  logic [5:0]   d;
  logic         sticky;
  logic [W-1:0] y4;
  logic         sticky4;
  int           checks = 0, failures = 0, n_far = 0;

  af_align #(.W(W), .DW(6)) dut (.x(x), .d(d), .y(y), .sticky(sticky));
  af_align #(.W(W), .DW(6), .STAGES(4)) dut4 (.x(x), .d(d), .y(y4), .sticky(sticky4));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint q, r, div;
    for (int k = 0; k < 20000; k++) begin
      x = W'($urandom);
      if (k % 7 == 0) x = x & W'(32'h3f);
      d = (k % 3 == 0) ? 6'($urandom) : 6'($urandom % 17);
      #1;
      div = (d <= 15) ? (longint'(1) << (2 * int'(d))) : 0;
      q = (d <= 15) ? longint'(x) / div : 0;
      r = (d <= 15) ? longint'(x) % div : longint'(x);
      checks++;
      if (longint'(y4) != q || sticky4 != (r != 0)) begin
        failures++;
        if (failures < 20) $display("FAIL(4 stages) x=%h d=%0d: y=%h st=%0d", x, d, y4, sticky4);
      end
      if (d <= 3) begin
        div = longint'(1) << (2 * int'(d));
        q = longint'(x) / div;
        r = longint'(x) % div;
      end else begin
        q = 0;
        r = longint'(x);
        n_far++;
      end
      checks++;
      if (longint'(y) != q || sticky != (r != 0)) begin
        failures++;
        if (failures < 20) $display("FAIL x=%h d=%0d: y=%h st=%0d", x, d, y, sticky);
      end
    end
    if (n_far == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
