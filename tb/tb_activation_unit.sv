// tb_activation_unit: IF and LIF neuron update against an integer reference.
// Checks the firing condition U >= Vth, reset-by-subtraction, the leak in
// LIF mode and saturation; counts spikes and non-spikes in both modes.
module tb_activation_unit;
  logic signed [15:0] x, u_prev, vth, u_next;
  logic lif, spike;
  logic [3:0] leak;
  int checks = 0, failures = 0;
  int n_spk[2], n_quiet[2];
  activation_unit dut (.x, .u_prev, .vth, .lif, .leak, .spike, .u_next);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic check(int xx, int up, int th, bit l, int lk);
    int ub, um, sp, un;
    x = 16'(xx); u_prev = 16'(up); vth = 16'(th); lif = l; leak = 4'(lk);
    #1;
    ub = l ? sat(int'(u_prev) - (int'(u_prev) >>> lk)) : int'(u_prev);
    um = sat(ub + int'(x));
    sp = (um >= int'(vth)) ? 1 : 0;
    un = sp ? sat(um - int'(vth)) : um;
    checks++;
    if (int'(spike) != sp || int'(u_next) != un) begin
      failures++;
      $display("x=%0d u=%0d vth=%0d lif=%0d leak=%0d: got %0d/%0d expected %0d/%0d",
               x, u_prev, vth, l, lk, spike, u_next, sp, un);
    end
    if (sp) n_spk[l]++; else n_quiet[l]++;
  endtask

  initial begin
    check(10, 90, 100, 0, 0);     // exactly at threshold: spike, U = 0
    check(9, 90, 100, 0, 0);      // just below
    check(50, 200, 100, 0, 0);    // U = 250 -> 150
    check(0, 160, 100, 1, 1);     // LIF: 160 - 80 = 80, no spike
    check(30, 160, 100, 1, 2);    // LIF: 160 - 40 + 30 = 150 -> 50
    check(32767, 32767, 1, 0, 0); // saturation
    for (int i = 0; i < 10000; i++)
      check($urandom_range(0, 600) - 300, $urandom_range(0, 1200) - 400,
            $urandom_range(1, 500), 1'($urandom), $urandom_range(0, 15));
    checks++;
    if (n_spk[0] == 0 || n_spk[1] == 0 || n_quiet[0] == 0 || n_quiet[1] == 0) begin
      failures++; $display("coverage hole: %0d %0d %0d %0d", n_spk[0], n_spk[1], n_quiet[0], n_quiet[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
