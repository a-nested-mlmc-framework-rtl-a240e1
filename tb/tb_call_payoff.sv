// tb_call_payoff -- random and directed terminal values against the call
// payoffs max(S-K,0) computed in integers, with and without a coarse path.
module tb_call_payoff;
  localparam int D = 16;

  logic signed [D:0]   sf, sc, k;
  logic                hc;
  logic signed [D+1:0] pf, pc;
  logic signed [D+2:0] dl;

  call_payoff #(.D_S(D)) dut (
    .s_fine(sf), .s_coarse(sc), .has_coarse(hc), .strike(k),
    .p_fine(pf), .p_coarse(pc), .delta(dl)
  );

  int checks = 0, failures = 0;

  function automatic longint pos(input longint x);
    return (x > 0) ? x : 0;
  endfunction

  task automatic one(input longint vf, input longint vc, input longint vk, input bit vh);
    longint ef, ec;
    sf = (D+1)'(vf); sc = (D+1)'(vc); k = (D+1)'(vk); hc = vh;
    #1;
    ef = pos(vf - vk);
    ec = vh ? pos(vc - vk) : 0;
    checks += 3;
    if (longint'(pf) != ef) begin failures++; $display("FAIL p_fine %0d vs %0d", pf, ef); end
    if (longint'(pc) != ec) begin failures++; $display("FAIL p_coarse %0d vs %0d", pc, ec); end
    if (longint'(dl) != ef - ec) begin failures++; $display("FAIL delta %0d vs %0d", dl, ef - ec); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint mx;
    mx = (longint'(1) << D) - 1;
    one(mx, -mx, -mx, 1);
    one(-mx, mx, mx, 1);
    one(mx, mx, -mx, 0);
    one(100, 100, 100, 1);
    one(101, 99, 100, 1);
    one(99, 101, 100, 1);
    for (int i = 0; i < 2000; i++)
      one(longint'($urandom_range(2 * mx, 0)) - mx, longint'($urandom_range(2 * mx, 0)) - mx,
          longint'($urandom_range(2 * mx, 0)) - mx, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
