// tb_serial_tx: loads random bytes, back to back every 11 cycles and with idle
// gaps, and checks every bit on the line: start 0, data LSB first, two stop
// bits 1, idle 1.
module tb_serial_tx;
  import chaos_pkg::*;
  logic clk = 0, rst = 1, load = 0;
  byte_t din;
  logic tx_out;
  int checks = 0, failures = 0;

  serial_tx dut (.clk(clk), .rst(rst), .load(load), .din(din), .tx_out(tx_out));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    logic [10:0] frame;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    chk(tx_out, 1'b1, "idle after reset");
    for (int i = 0; i < 600; i++) begin
      int gap;
      din = byte_t'($urandom);
      frame = {2'b11, din, 1'b0};
      load = 1;
      @(posedge clk);
      #1 load = 0;
      gap = (i % 5 == 4) ? $urandom_range(1, 7) : 0;
      for (int b = 0; b < 11; b++) begin
        chk(tx_out, frame[b], $sformatf("frame %0d bit %0d", i, b));
        if (b < 10) begin @(posedge clk); #1; end
      end
      // last bit is on the line now; next load at the following edge (back to back)
      for (int g = 0; g < gap; g++) begin
        @(posedge clk);
        #1 chk(tx_out, 1'b1, "idle gap");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
