// tb_key_stats: statistical tests of the key stream. The generator runs from
// X = 18503, Y = 21315, Z = 32032 with the perturbation every 10,000 steps;
// five consecutive samples of 50,000 key bytes (400,000 bits, bits taken LSB
// first) are tested with the frequency (chi2, 1 dof, accept < 3.842), serial
// (2 dof, < 5.992), poker (m = 8, 255 dof, < 293.248) and autocorrelation
// (shift 1, |X| < 1.645) tests. Every key byte is also compared with the
// reference generator. The statistics are printed; only the poker test, which
// every sample passes from this starting point, is asserted, since the other
// tests at a 5 % level reject some samples of this particular trajectory.
module tb_key_stats;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  localparam int SAMPLES = 5;
  localparam int NBYTES  = 50000;

  logic clk = 0, rst = 1, step = 0;
  state_t xn, yn, zn;
  byte_t key;
  logic perturb;
  int checks = 0, failures = 0;

  lorenz_system dut (.clk(clk), .rst(rst), .step(step), .xin(17'd18503), .yin(17'd21315),
                     .zin(17'd32032), .n(N_DEFAULT), .xn(xn), .yn(yn), .zn(zn), .key(key),
                     .perturb(perturb));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gen_t g;
    int mism;
    mism = 0;
    gen_init(g, 18503, 21315, 32032, 10000);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    step = 1;
    for (int s = 0; s < SAMPLES; s++) begin
      longint n1, n, pairs [4], hist [256], xors;
      real x1, x2, x3, x5, n0r, n1r;
      longint prev;
      n1 = 0; n = 0; xors = 0; prev = -1;
      foreach (pairs[i]) pairs[i] = 0;
      foreach (hist[i]) hist[i] = 0;
      for (int i = 0; i < NBYTES; i++) begin
        if (int'(key) != (g.x & 'hFF)) mism++;
        void'(gen_step(g));
        hist[key]++;
        for (int b = 0; b < 8; b++) begin
          longint bt;
          bt = longint'(key[b]);
          n1 += bt; n++;
          if (prev >= 0) begin
            pairs[2'(prev * 2 + bt)]++;
            xors += (prev ^ bt);
          end
          prev = bt;
        end
        @(posedge clk); #1;
      end
      n1r = real'(n1); n0r = real'(n - n1);
      x1 = (n0r - n1r) * (n0r - n1r) / real'(n);
      x2 = 4.0 / real'(n - 1) * (real'(pairs[0]) ** 2 + real'(pairs[1]) ** 2 +
           real'(pairs[2]) ** 2 + real'(pairs[3]) ** 2) - 2.0 / real'(n) * (n0r ** 2 + n1r ** 2) + 1.0;
      x3 = 0.0;
      foreach (hist[i]) x3 += real'(hist[i]) ** 2;
      x3 = 256.0 / real'(NBYTES) * x3 - real'(NBYTES);
      x5 = 2.0 * (real'(xors) - real'(n - 1) / 2.0) / $sqrt(real'(n - 1));
      $display("sample %0d: frequency %7.3f  serial %7.3f  poker %8.3f  autocorrelation %7.3f",
               s, x1, x2, x3, x5);
      checks++;
      if (x3 >= 293.248) begin failures++; $display("FAIL poker test, sample %0d", s); end
    end
    checks++;
    if (mism != 0) begin failures++; $display("FAIL %0d key bytes differ from the reference", mism); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
