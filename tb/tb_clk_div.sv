// tb_clk_div: checks the tick period of the 1/11 and 1/44 dividers, the
// effect of `en` and the restart by `clr`, cycle by cycle against a counter
// kept in the testbench.
module tb_clk_div;
  logic clk = 0, rst = 1, en = 0, clr = 0;
  logic tick11, tick44;
  int checks = 0, failures = 0, ticks11 = 0, ticks44 = 0;

  clk_div #(.DIV(11)) dut11 (.clk(clk), .rst(rst), .en(1'b1), .clr(1'b0), .tick(tick11));
  clk_div #(.DIV(44)) dut44 (.clk(clk), .rst(rst), .en(en), .clr(clr), .tick(tick44));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected tick positions from cycle counters.
  int cyc = 0, c44 = 0;
  bit exp11, exp44;

  always @(posedge clk) begin
    if (!rst) begin
      exp11 = (cyc % 11) == 10;
      exp44 = en && (c44 == 43);
      checks += 2;
      if (tick11 !== exp11) begin failures++; $display("FAIL tick11 at %0d", cyc); end
      if (tick44 !== exp44) begin failures++; $display("FAIL tick44 at %0d (c44=%0d)", cyc, c44); end
      ticks11 += int'(tick11);
      ticks44 += int'(tick44);
      cyc++;
      if (clr)     c44 = 1;
      else if (en) c44 = (c44 == 43) ? 0 : c44 + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (20) @(posedge clk);          // en low: no ticks
    #1 en = 1;
    repeat (200) @(posedge clk);
    #1 en = 0;
    repeat (30) @(posedge clk);
    #1 en = 1;
    for (int i = 0; i < 200; i++) begin  // random restarts
      repeat (1 + $urandom_range(0, 60)) @(posedge clk);
      #1 clr = 1;
      @(posedge clk);
      #1 clr = 0;
    end
    repeat (100) @(posedge clk);
    checks++;
    if (ticks11 < 100 || ticks44 < 20) begin
      failures++;
      $display("FAIL too few ticks %0d %0d", ticks11, ticks44);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
