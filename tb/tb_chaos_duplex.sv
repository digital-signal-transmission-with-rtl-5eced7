// tb_chaos_duplex: end-to-end test of the full-duplex link at its default
// size, with the reference clocks (6.25 MHz transmit, 25 MHz receive) and an
// ideal channel (out_tx_a -> in_rx_b, out_tx_b -> in_rx_a).
//
// Phase 1: A sends the repeating sequence 0..255 from the published initial
// conditions with the perturbation period N = 10000; B sends random bytes from
// other initial conditions with N = 7. Both directions run for more than
// 10000 bytes, so the default-period perturbation happens too; every recovered
// byte is compared with what was sent, and the byte rate is checked.
// Phase 2: receiver B gets an initial X one LSB off; its bit error ratio must
// be near 0.5. Each mechanism (byte delivery both ways, perturbation in each of
// the four generators, key mismatch) is counted and must occur.
module tb_chaos_duplex;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBYTES = 10100;

  logic clk_tx = 0, clk_rx = 0, rst_tx = 1, rst_rx = 1;
  lorenz_cfg_t cfg_a_tx, cfg_a_rx, cfg_b_tx, cfg_b_rx;
  byte_t plain_a, plain_b, rec_a, rec_b;
  logic pt_load_a, pt_load_b, line_ab, line_ba;
  logic rec_valid_a, rec_valid_b, frame_err_a, frame_err_b;
  logic [3:0] perturb;
  int checks = 0, failures = 0;

  chaos_duplex dut (
    .clk_tx(clk_tx), .rst_tx(rst_tx), .clk_rx(clk_rx), .rst_rx(rst_rx),
    .cfg_a_tx(cfg_a_tx), .cfg_a_rx(cfg_a_rx), .plain_a(plain_a), .pt_load_a(pt_load_a),
    .out_tx_a(line_ab), .in_rx_a(line_ba), .rec_text_a(rec_a), .rec_valid_a(rec_valid_a),
    .frame_err_a(frame_err_a),
    .cfg_b_tx(cfg_b_tx), .cfg_b_rx(cfg_b_rx), .plain_b(plain_b), .pt_load_b(pt_load_b),
    .out_tx_b(line_ba), .in_rx_b(line_ab), .rec_text_b(rec_b), .rec_valid_b(rec_valid_b),
    .frame_err_b(frame_err_b), .perturb(perturb)
  );

  always #80 clk_tx = ~clk_tx;
  always #20 clk_rx = ~clk_rx;

  initial begin
    repeat (2000000) @(posedge clk_tx);
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

  // Sources
  int q_ab[$], q_ba[$], sent_a = 0;
  always @(posedge clk_tx) begin
    if (!rst_tx && pt_load_a) begin
      q_ab.push_back(int'(plain_a));
      sent_a++;
      #1 plain_a = byte_t'(sent_a % 256);
    end
  end
  always @(posedge clk_tx) begin
    if (!rst_tx && pt_load_b) begin
      q_ba.push_back(int'(plain_b));
      #1 plain_b = byte_t'($urandom);
    end
  end

  // Sinks
  bit mismatch = 0;
  int got_ab = 0, got_ba = 0, bit_err = 0, nmis = 0, last_b = -1, cyc_rx = 0, rate_bad = 0;
  int perturbs [4] = '{0, 0, 0, 0};
  always @(posedge clk_rx) cyc_rx++;
  always @(posedge clk_rx) begin
    if (!rst_rx && rec_valid_b) begin
      int e;
      e = q_ab.pop_front();
      if (mismatch) begin
        bit_err += $countones(rec_b ^ byte_t'(e));
        nmis++;
      end else begin
        chk(int'(rec_b), e, $sformatf("A->B byte %0d", got_ab));
        if (last_b >= 0 && cyc_rx - last_b != 44) rate_bad++;
        got_ab++;
      end
      last_b = cyc_rx;
    end
    if (!rst_rx && rec_valid_a) begin
      chk(int'(rec_a), q_ba.pop_front(), $sformatf("B->A byte %0d", got_ba));
      got_ba++;
    end
    if (!rst_rx && (frame_err_a || frame_err_b)) chk(1, 0, "frame error");
  end
  // perturb is a level held until the perturbed step: count its rising edges
  logic [1:0] pq_tx = '0, pq_rx = '0;
  always @(posedge clk_tx) begin
    if (!rst_tx) begin
      if (perturb[0] && !pq_tx[0]) perturbs[0]++;
      if (perturb[2] && !pq_tx[1]) perturbs[2]++;
    end
    pq_tx <= {perturb[2], perturb[0]};
  end
  always @(posedge clk_rx) begin
    if (!rst_rx) begin
      if (perturb[1] && !pq_rx[0]) perturbs[1]++;
      if (perturb[3] && !pq_rx[1]) perturbs[3]++;
    end
    pq_rx <= {perturb[3], perturb[1]};
  end

  task automatic reset_all();
    rst_tx = 1; rst_rx = 1;
    repeat (3) @(posedge clk_tx);
    #1 rst_rx = 0;
    repeat (5) @(posedge clk_tx);
    #1 rst_tx = 0;
  endtask

  initial begin
    real ber;
    cfg_a_tx = '{xin: state_t'(FIG_X0), yin: state_t'(FIG_Y0), zin: state_t'(FIG_Z0), n: N_DEFAULT};
    cfg_b_rx = cfg_a_tx;
    cfg_b_tx = '{xin: 17'd18503, yin: 17'd21315, zin: 17'd32032, n: 14'd7};
    cfg_a_rx = cfg_b_tx;
    plain_a = 0; plain_b = byte_t'($urandom);
    reset_all();
    wait (got_ab >= NBYTES && got_ba >= NBYTES);
    $display("phase 1: %0d bytes A->B, %0d bytes B->A", got_ab, got_ba);
    // Phase 2: mismatched receiver.
    mismatch = 1;
    cfg_b_rx.xin = cfg_a_tx.xin + 17'd1;
    q_ab.delete(); q_ba.delete(); sent_a = 0; plain_a = 0; last_b = -1;
    reset_all();
    wait (nmis >= 1000);
    ber = real'(bit_err) / (8.0 * nmis);
    $display("phase 2: BER %f over %0d bytes with X0 off by one LSB", ber, nmis);
    $display("perturbations: tx A %0d, rx B %0d, tx B %0d, rx A %0d",
             perturbs[0], perturbs[1], perturbs[2], perturbs[3]);
    $display("rate violations: %0d", rate_bad);
    // mechanism counts
    chk(int'(got_ab >= NBYTES), 1, "A->B delivery");
    chk(int'(got_ba >= NBYTES), 1, "B->A delivery");
    for (int i = 0; i < 4; i++) chk(int'(perturbs[i] > 0), 1, $sformatf("perturbation in generator %0d", i));
    chk(int'(perturbs[0] >= 1 && perturbs[1] >= 1), 1, "default-period perturbation A->B");
    chk(rate_bad, 0, "one byte per 44 receive clocks");
    chk(int'(ber > 0.4 && ber < 0.6), 1, "mismatch BER near 0.5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
