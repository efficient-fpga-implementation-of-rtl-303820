// tb_lif_neuron -- exhaustive check of one LIF step.
// Every (v, i) pair of 8-bit states is applied with random input currents and
// compared against a reference written with explicit floor divisions
// (dt/tau_m = 1/8, dt/tau_s = 1/4, spike when v_dec > 1.0, reset to 0,
// saturating current). Also counts how often a spike, a saturation and a
// negative decay occurred, and fails if one of them never did.
module tb_lif_neuron;
  localparam int SW = 8, IW = 16, VTH = 16;
  logic signed [SW-1:0] v, i, v_next, i_next;
  logic signed [IW-1:0] i_in;
  logic spike;
  int checks = 0, failures = 0;
  int n_spike = 0, n_sat = 0, n_neg = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  lif_neuron dut (.*);   // defaults: 8-bit state, 16-bit input, shifts 3 and 2, v_th = 16

  function automatic int fdiv(int a, int b);  // floor(a / b), b > 0
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction
  function automatic int clamp(int x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vd, id, s, ev, ei, inv;
    for (int a = -128; a < 128; a++) begin
      for (int b = -128; b < 128; b++) begin
        v = SW'(a); i = SW'(b);
        inv = (b[0]) ? int'($urandom_range(0, 600)) - 300 : int'($urandom_range(0, 64)) - 32;
        i_in = IW'(inv);
        #1;
        vd = a + fdiv(b - a, 8);
        id = b - fdiv(b, 4);
        s  = (vd > VTH) ? 1 : 0;
        ev = (s != 0) ? 0 : clamp(vd);
        ei = clamp(id + inv);
        if (s != 0) n_spike++;
        if (id + inv != ei) n_sat++;
        if (b - a < 0 && vd < a) n_neg++;
        checks++;
        if (int'(v_next) != ev || int'(i_next) != ei || int'(spike) != s) begin
          failures++;
          if (failures < 10)
            $display("mismatch v=%0d i=%0d in=%0d: got v'=%0d i'=%0d z=%0d exp %0d %0d %0d",
                     a, b, inv, v_next, i_next, spike, ev, ei, s);
        end
      end
      @(posedge clk);
    end
    // threshold edge: exactly 1.0 must not spike, just above must
    v = 8'sd16; i = 8'sd16; i_in = '0; #1;
    checks++; if (spike) failures++;
    v = 8'sd17; i = 8'sd17; #1;
    checks++; if (!spike || v_next != 0) failures++;
    if (n_spike == 0 || n_sat == 0 || n_neg == 0) begin
      failures++;
      $display("coverage hole: spikes=%0d saturations=%0d negative decays=%0d", n_spike, n_sat, n_neg);
    end
    $display("spikes=%0d saturations=%0d negative decays=%0d", n_spike, n_sat, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
