// tb_fxp_requant -- checks rounding to nearest, exact left shifts and
// symmetric clamping of fxp_requant against a real-number model, in three
// configurations: coarser output LSB (rounding), finer output LSB (exact
// shift) and equal LSB (clamp only).
module tb_fxp_requant;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  // A: 24-bit input, LSB 2^-20 -> 10 bits, LSB 2^-8 (drops 12 bits)
  logic signed [23:0] a_in;  logic signed [10:0] a_out; logic a_sat;
  fxp_requant #(.IN_W(24), .IN_LSB(-20), .OUT_D(10), .OUT_LSB(-8))
    dut_a (.in_val(a_in), .out_val(a_out), .sat(a_sat));
  // B: 8-bit input, LSB 2^-2 -> 12 bits, LSB 2^-6 (left shift by 4)
  logic signed [7:0]  b_in;  logic signed [12:0] b_out; logic b_sat;
  fxp_requant #(.IN_W(8), .IN_LSB(-2), .OUT_D(12), .OUT_LSB(-6))
    dut_b (.in_val(b_in), .out_val(b_out), .sat(b_sat));
  // C: 12-bit input -> 6 bits at the same LSB (clamp only)
  logic signed [11:0] c_in;  logic signed [6:0]  c_out; logic c_sat;
  fxp_requant #(.IN_W(12), .IN_LSB(-3), .OUT_D(6), .OUT_LSB(-3))
    dut_c (.in_val(c_in), .out_val(c_out), .sat(c_sat));

  task automatic check(input string what, input longint got, input longint exp,
                       input bit gsat, input bit esat);
    checks++;
    if (got !== exp || gsat !== esat) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: got %0d sat %0b, expected %0d sat %0b", what, got, gsat, exp, esat);
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
    bit     es;
    longint e;
    // directed ties and ends for A: 0x800 is exactly half an output LSB
    longint dir_a[] = '{0, 2047, 2048, 2049, -2048, -2049, -2047, 4095, 4096,
                        (1 << 22) - 1, -(1 << 22), 2095103, 2095104, -2095104, -2095105};
    foreach (dir_a[i]) begin
      a_in = 24'(dir_a[i]);
      #1;
      e = rq(real'(dir_a[i]) * pow2(-20), 10, -8, es);
      check("A dir", longint'(a_out), e, a_sat, es);
    end
    for (int i = 0; i < 3000; i++) begin
      a_in = 24'($urandom);
      b_in = 8'($urandom);
      c_in = 12'($urandom);
      #1;
      e = rq(real'(a_in) * pow2(-20), 10, -8, es);
      check("A", longint'(a_out), e, a_sat, es);
      e = rq(real'(b_in) * pow2(-2), 12, -6, es);
      check("B", longint'(b_out), e, b_sat, es);
      e = rq(real'(c_in) * pow2(-3), 6, -3, es);
      check("C", longint'(c_out), e, c_sat, es);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
