// tb_lorenz_period: measures the period of the key generator's state sequence
// with Brent's cycle-finding method, starting from X = 18503, Y = 21315,
// Z = 32032. Without perturbation (N = 0) the sequence must repeat every
// 78,782 steps; with the perturbation every 10,000 steps the period must be
// 6,500,000 steps. The generator is stepped on every clock.
module tb_lorenz_period;
  import chaos_pkg::*;

  typedef struct packed {
    state_t x, y, z;
    int     phase;     // step count modulo N: the perturbation counter's phase
  } snap_t;

  logic clk = 0, rst = 1, step = 0;
  state_t xn, yn, zn;
  logic [N_W-1:0] n;
  byte_t key;
  logic perturb;
  int checks = 0, failures = 0;

  lorenz_system dut (.clk(clk), .rst(rst), .step(step), .xin(17'd18503), .yin(17'd21315),
                     .zin(17'd32032), .n(n), .xn(xn), .yn(yn), .zn(zn), .key(key),
                     .perturb(perturb));

  always #5 clk = ~clk;

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int nper, int expected, longint limit);
    snap_t tort, hare;
    longint power, lam, steps, k;
    n = N_W'(nper);
    rst = 1; step = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    k = 0;
    tort = '{x: xn, y: yn, z: zn, phase: 0};
    step = 1;
    @(posedge clk); #1 k++;
    power = 1; lam = 1; steps = 0;
    forever begin
      hare = '{x: xn, y: yn, z: zn, phase: (nper == 0) ? 0 : int'(k % longint'(nper))};
      if (hare == tort || steps > limit) break;
      if (power == lam) begin
        tort = hare; power *= 2; lam = 0;
      end
      @(posedge clk); #1 k++;
      lam++; steps++;
    end
    step = 0;
    checks++;
    if (lam != longint'(expected)) begin
      failures++;
      $display("FAIL N=%0d: period %0d, expected %0d", nper, lam, expected);
    end else
      $display("N=%0d: period %0d steps", nper, lam);
  endtask

  initial begin
    measure(0, 78782, 2000000);
    measure(10000, 6500000, 40000000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
