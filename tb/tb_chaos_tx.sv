// tb_chaos_tx: runs the transmitter from the published initial conditions
// with the published plain text (six zeros, then 1, 2, 3, ...), decodes the
// serial line and checks the cipher bytes against the published timing
// diagram, then against the reference generator for many more bytes with a
// short perturbation period. Also checks one byte per 11 clocks.
module tb_chaos_tx;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst = 1;
  lorenz_cfg_t cfg;
  byte_t plain, ct, key;
  state_t xn;
  logic pt_load, perturb, out_tx;
  int checks = 0, failures = 0, perturbs = 0;

  chaos_tx dut (.clk_tx(clk), .rst(rst), .cfg(cfg), .plain_text(plain), .pt_load(pt_load),
                .cipher_text(ct), .key(key), .xn(xn), .perturb(perturb), .out_tx(out_tx));

  always #80 clk = ~clk;   // 6.25 MHz

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(int nper, int nbytes, bit fig);
    gen_t g;
    int last_load;
    int cyc;
    gen_init(g, FIG_X0, FIG_Y0, FIG_Z0, nper);
    cfg = '{xin: state_t'(FIG_X0), yin: state_t'(FIG_Y0), zin: state_t'(FIG_Z0), n: N_W'(nper)};
    plain = byte_t'(fig_plain(0));
    rst = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    cyc = 0; last_load = -1;
    for (int i = 0; i < nbytes; i++) begin
      logic [10:0] f;
      int exp_ct;
      // wait for the load strobe
      while (!pt_load) begin @(posedge clk); #1 cyc++; end
      if (last_load >= 0) chk(cyc - last_load, 11, "cycles per byte");
      last_load = cyc;
      exp_ct = fig_plain(i) ^ (g.x & 'hFF);
      chk(int'(key), g.x & 'hFF, "key");
      if (fig && i < FIG_LEN) chk(int'(xn), FIG_X[i], "fig Xn");
      if (fig && i < FIG_CT_LEN) chk(int'(ct), FIG_CT[i], "fig cipher_text");
      if (gen_step(g)) perturbs++;
      chk(int'(perturb), int'(g.cnt > 0 && g.n != 0 && ((g.cnt - 1) % g.n) == g.n - 1), "perturb");
      // decode the frame from the line
      for (int b = 0; b < 11; b++) begin
        @(posedge clk); #1 cyc++;
        f[b] = out_tx;
        if (b == 0) plain = byte_t'(fig_plain(i + 1));
      end
      chk(int'(f[0]), 0, "start bit");
      chk(int'(f[10:9]), 3, "stop bits");
      chk(int'(f[8:1]), exp_ct, $sformatf("line byte %0d", i));
    end
  endtask

  initial begin
    run(10000, 40, 1);
    run(5, 600, 0);
    checks++;
    if (perturbs < 100) begin failures++; $display("FAIL perturbations %0d", perturbs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
