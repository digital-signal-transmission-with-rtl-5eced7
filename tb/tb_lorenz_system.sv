// tb_lorenz_system: steps the key generator and compares every state with the
// reference model: unperturbed (N = 0) along the published trajectory, and
// with small perturbation periods. Also checks that the key is Xn[7:0], that
// `perturb` fires exactly on the N-th steps and that the state holds without
// a step.
module tb_lorenz_system;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst = 1, step = 0;
  state_t xin, yin, zin, xn, yn, zn;
  logic [N_W-1:0] n;
  byte_t key;
  logic perturb;
  int checks = 0, failures = 0, perturbs = 0;

  lorenz_system dut (.clk(clk), .rst(rst), .step(step), .xin(xin), .yin(yin), .zin(zin),
                     .n(n), .xn(xn), .yn(yn), .zn(zn), .key(key), .perturb(perturb));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int x0, int y0, int z0, int nper, int steps, bit fig);
    gen_t g;
    bit p;
    gen_init(g, x0, y0, z0, nper);
    xin = state_t'(x0); yin = state_t'(y0); zin = state_t'(z0); n = N_W'(nper);
    rst = 1; step = 0;
    @(posedge clk); @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < steps; i++) begin
      check("x", int'(xn), g.x);
      check("y", int'(yn), g.y);
      check("z", int'(zn), g.z);
      check("key", int'(key), g.x & 'hFF);
      if (fig && i < FIG_LEN) check("fig x", int'(xn), FIG_X[i]);
      // Idle cycles in between must not change the state.
      repeat (i % 3) @(posedge clk);
      #1 check("hold", int'(xn), g.x);
      p = gen_step(g);
      check("perturb", int'(perturb), int'(p));
      if (perturb) perturbs++;
      step = 1;
      @(posedge clk);
      #1 step = 0;
    end
  endtask

  initial begin
    run(FIG_X0, FIG_Y0, FIG_Z0, 0, 200, 1);
    run(FIG_X0, FIG_Y0, FIG_Z0, 10000, 100, 1);   // first 100 steps: no perturbation yet
    run(FIG_X0, FIG_Y0, FIG_Z0, 7, 300, 0);
    run(18503, 21315, 32032, 1, 50, 0);
    run(18503, 21315, 32032, 13, 400, 0);
    checks++;
    if (perturbs < 60) begin
      failures++;
      $display("FAIL too few perturbations: %0d", perturbs);
    end
    $display("perturbations seen: %0d", perturbs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
