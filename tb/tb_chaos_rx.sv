// tb_chaos_rx: feeds the receiver a serial cipher stream produced by the
// reference generator (4 clocks per bit, frames back to back after an idle
// start) and checks data, key and recovered text byte by byte, also with
// frames one sample shorter or longer than 44 clocks, the Fig. 4b
// values, one byte per 44 clocks, and that a receiver whose initial X differs
// in its least significant bit recovers garbage (bit error ratio near 0.5).
module tb_chaos_rx;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst = 1, in_rx = 1;
  lorenz_cfg_t cfg;
  byte_t data, rec, key;
  state_t xn;
  logic rec_valid, frame_err, perturb;
  int checks = 0, failures = 0, perturbs = 0;

  chaos_rx dut (.clk_rx(clk), .rst(rst), .cfg(cfg), .in_rx(in_rx), .data(data), .rec_text(rec),
                .rec_valid(rec_valid), .frame_err(frame_err), .key(key), .xn(xn), .perturb(perturb));

  always #20 clk = ~clk;   // 25 MHz

  initial begin
    repeat (2000000) @(posedge clk);
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

  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (perturb && !rst) perturbs++;

  // Receiver side: compare every recovered byte with the queue of plain bytes.
  int exp_plain[$], exp_ct[$], nrec = 0, bit_err = 0, last_rec = -1;
  bit fig_mode, mismatch, jit;
  always @(posedge clk) begin
    if (!rst && rec_valid) begin
      int p, c;
      p = exp_plain.pop_front();
      c = exp_ct.pop_front();
      if (mismatch) begin
        bit_err += $countones(rec ^ byte_t'(p));
      end else begin
        chk(int'(rec), p, $sformatf("rec_text %0d", nrec));
        chk(int'(data), c, "data");
        if (fig_mode && nrec < FIG_CT_LEN) chk(int'(data), FIG_CT[nrec], "fig data");
        if (last_rec >= 0 && !jit) chk(cyc - last_rec, 44, "cycles per byte");
      end
      last_rec = cyc;
      nrec++;
    end
    if (!rst && frame_err) chk(1, 0, "frame error");
  end

  task automatic run(int nper, int nbytes, bit fig, int xoff, bit jitter = 0);
    gen_t g;
    gen_init(g, FIG_X0, FIG_Y0, FIG_Z0, nper);
    cfg = '{xin: state_t'(FIG_X0 + xoff), yin: state_t'(FIG_Y0), zin: state_t'(FIG_Z0), n: N_W'(nper)};
    fig_mode = fig; mismatch = (xoff != 0); jit = jitter; nrec = 0; last_rec = -1;
    rst = 1; in_rx = 1;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (300) @(posedge clk);
    #1 chk(int'(xn), FIG_X0 + xoff, "no step before the first frame");
    for (int i = 0; i < nbytes; i++) begin
      int p, c;
      logic [10:0] f;
      p = fig ? fig_plain(i) : int'($urandom_range(0, 255));
      c = p ^ (g.x & 'hFF);
      void'(gen_step(g));
      exp_plain.push_back(p);
      exp_ct.push_back(c);
      f = {2'b11, byte_t'(c), 1'b0};
      for (int b = 0; b < 11; b++) begin
        in_rx = f[b];
        // with jitter, the last stop bit lasts 3, 4 or 5 samples: frames of 43..45 cycles
        repeat ((jitter && b == 10) ? 3 + (i % 3) : 4) @(posedge clk);
        #1;
      end
    end
    repeat (100) @(posedge clk);
    chk(exp_plain.size(), 0, "bytes left undelivered");
    chk(nrec, nbytes, "bytes received");
    exp_plain.delete(); exp_ct.delete();
  endtask

  initial begin
    real ber;
    run(10000, 40, 1, 0);
    run(3, 800, 0, 0);
    run(5, 600, 0, 0, 1);       // transmitter clock off by up to one sample per frame
    bit_err = 0;
    run(10000, 1000, 0, 1);
    ber = real'(bit_err) / (8.0 * 1000);
    $display("BER with X0 off by one LSB: %f", ber);
    checks++;
    if (ber < 0.4 || ber > 0.6) begin failures++; $display("FAIL BER %f", ber); end
    checks++;
    if (perturbs < 200) begin failures++; $display("FAIL perturbations %0d", perturbs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
