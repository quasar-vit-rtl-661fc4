// tb_dsp48e2_mul: checks P = (A + D) x B of the DSP slice model against a
// 64-bit reference (27-bit wrapping pre-adder) on corner and random operands.
//
// Interface and timing: no ports; the unit is combinational, so each
// stimulus is applied and checked after a 1 ns delay. A watchdog ends a hung
// run with a failure. References are computed here from the arithmetic
// definitions, independently of the design.
module tb_dsp48e2_mul;
  logic signed [26:0] a, d;
  logic signed [17:0] b;
  logic signed [47:0] p;
  int checks = 0, failures = 0;

  dsp48e2_mul dut (.a, .d, .b, .p);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(longint av, longint dv, longint bv);
    longint ad, exp_p;
    a = 27'(av); d = 27'(dv); b = 18'(bv);
    #1;
    ad = longint'(a) + longint'(d);
    ad = (ad << 37) >>> 37;              // keep 27 bits, signed
    exp_p = ad * longint'(b);
    checks++;
    if (longint'(p) != exp_p) begin
      failures++;
      $display("MISMATCH a=%0d d=%0d b=%0d p=%0d exp=%0d", a, d, b, p, exp_p);
    end
  endtask

  initial begin
    try(0, 0, 0);
    try(-(1 << 26), 0, -(1 << 17));
    try((1 << 26) - 1, 0, (1 << 17) - 1);
    try(5, 7, -3);
    try((1 << 26) - 1, 1, 2);            // pre-adder wraps
    for (int i = 0; i < 3000; i++)
      try(longint'($urandom) - (1 << 31), longint'($urandom) - (1 << 31), longint'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
