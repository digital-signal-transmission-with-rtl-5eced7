// tb_param_mismatch: bit error ratio against a mismatch of the map constant
// p = 13440 (the additive constant of the Z update) between transmitter and
// receiver. One transmitter drives three receivers over an ideal channel: one
// with the same constant (must recover every byte), one whose constant is one
// LSB higher and one 1 % higher (both must lose the text, BER near 0.5).
module tb_param_mismatch;
  import chaos_pkg::*;

  localparam int NBYTES = 3000;
  localparam int unsigned P_LSB = Z_CONST + 1;
  localparam int unsigned P_PCT = Z_CONST + Z_CONST / 100;

  logic clk_tx = 0, clk_rx = 0, rst_tx = 1, rst_rx = 1;
  lorenz_cfg_t cfg;
  byte_t plain, ct, key_t, rec [3], data [3], key_r [3];
  state_t x_t, x_r [3];
  logic pt_load, perturb_t, line;
  logic rec_valid [3], frame_err [3], perturb_r [3];
  int checks = 0, failures = 0;

  always #80 clk_tx = ~clk_tx;
  always #20 clk_rx = ~clk_rx;

  chaos_tx u_tx (.clk_tx(clk_tx), .rst(rst_tx), .cfg(cfg), .plain_text(plain), .pt_load(pt_load),
                 .cipher_text(ct), .key(key_t), .xn(x_t), .perturb(perturb_t), .out_tx(line));

  chaos_rx u_rx0 (.clk_rx(clk_rx), .rst(rst_rx), .cfg(cfg), .in_rx(line), .data(data[0]),
                  .rec_text(rec[0]), .rec_valid(rec_valid[0]), .frame_err(frame_err[0]),
                  .key(key_r[0]), .xn(x_r[0]), .perturb(perturb_r[0]));
  chaos_rx #(.CZ(P_LSB)) u_rx1 (.clk_rx(clk_rx), .rst(rst_rx), .cfg(cfg), .in_rx(line),
                  .data(data[1]), .rec_text(rec[1]), .rec_valid(rec_valid[1]),
                  .frame_err(frame_err[1]), .key(key_r[1]), .xn(x_r[1]), .perturb(perturb_r[1]));
  chaos_rx #(.CZ(P_PCT)) u_rx2 (.clk_rx(clk_rx), .rst(rst_rx), .cfg(cfg), .in_rx(line),
                  .data(data[2]), .rec_text(rec[2]), .rec_valid(rec_valid[2]),
                  .frame_err(frame_err[2]), .key(key_r[2]), .xn(x_r[2]), .perturb(perturb_r[2]));

  initial begin
    repeat (1000000) @(posedge clk_tx);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int q [3][$];
  int sent = 0;
  always @(posedge clk_tx) begin
    if (!rst_tx && pt_load) begin
      for (int r = 0; r < 3; r++) q[r].push_back(int'(plain));
      sent++;
      #1 plain = byte_t'(sent % 256);
    end
  end

  int nrec [3] = '{0, 0, 0};
  int berr [3] = '{0, 0, 0};
  always @(posedge clk_rx) begin
    if (!rst_rx)
      for (int r = 0; r < 3; r++)
        if (rec_valid[r]) begin
          berr[r] += $countones(rec[r] ^ byte_t'(q[r].pop_front()));
          nrec[r]++;
        end
  end

  initial begin
    real ber [3];
    cfg = '{xin: 17'd18503, yin: 17'd21315, zin: 17'd32032, n: N_DEFAULT};
    plain = 0;
    repeat (3) @(posedge clk_tx);
    #1 rst_rx = 0;
    repeat (3) @(posedge clk_tx);
    #1 rst_tx = 0;
    wait (nrec[0] >= NBYTES && nrec[1] >= NBYTES && nrec[2] >= NBYTES);
    for (int r = 0; r < 3; r++) ber[r] = real'(berr[r]) / (8.0 * nrec[r]);
    $display("BER: matched %f, p + 1 LSB %f, p + 1%% %f", ber[0], ber[1], ber[2]);
    checks += 3;
    if (berr[0] != 0) begin failures++; $display("FAIL matched receiver has errors"); end
    if (ber[1] < 0.4 || ber[1] > 0.6) begin failures++; $display("FAIL 1-LSB mismatch BER"); end
    if (ber[2] < 0.4 || ber[2] > 0.6) begin failures++; $display("FAIL 1%% mismatch BER"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
