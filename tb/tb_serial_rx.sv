// tb_serial_rx: sends random frames at 4 clocks per bit (back to back, with
// gaps, with a bad stop bit and with a short glitch) and checks the bytes,
// the error pulses and the latency from the start bit to `valid`.
module tb_serial_rx;
  import chaos_pkg::*;
  logic clk = 0, rst = 1, rx_in = 1;
  logic start, valid, frame_err;
  byte_t data;
  int checks = 0, failures = 0, nvalid = 0, nerr = 0;
  byte_t exp_q[$];
  int start_cyc = -1, cyc = 0;

  serial_rx dut (.clk(clk), .rst(rst), .rx_in(rx_in), .start(start), .data(data),
                 .valid(valid), .frame_err(frame_err));

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (start) start_cyc = cyc;
    if (valid) begin
      nvalid++;
      checks += 2;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected byte %0d", data);
      end else begin
        byte_t e;
        e = exp_q.pop_front();
        if (data !== e) begin failures++; $display("FAIL data %0d expected %0d", data, e); end
      end
      // start seen at sample 0; stop bit sampled at 38; valid the cycle after
      if (cyc - start_cyc != 39) begin
        failures++; $display("FAIL latency %0d", cyc - start_cyc);
      end
    end
    if (frame_err) nerr++;
  end

  task automatic send(byte_t b, bit stop_ok);
    logic [10:0] f;
    f = {1'b1, stop_ok, b, 1'b0};
    for (int i = 0; i < 11; i++) begin
      rx_in = f[i];
      repeat (4) @(posedge clk);
    end
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);
    for (int i = 0; i < 1000; i++) begin
      byte_t b;
      b = byte_t'($urandom);
      if (i % 97 == 50) begin
        send(b, 1'b0);            // framing error: no byte expected
      end else begin
        exp_q.push_back(b);
        send(b, 1'b1);
      end
      if (i % 10 == 9) repeat ($urandom_range(1, 9)) @(posedge clk);
      if (i % 131 == 7) begin     // one-sample glitch on an idle line
        rx_in = 0; @(posedge clk); rx_in = 1;
        repeat (12) @(posedge clk);
      end
    end
    repeat (100) @(posedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d bytes lost", exp_q.size()); end
    if (nerr != 10) begin failures++; $display("FAIL frame errors %0d expected 10", nerr); end
    $display("bytes %0d frame errors %0d", nvalid, nerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
