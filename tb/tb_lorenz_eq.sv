// tb_lorenz_eq: checks the map against the published X sequence and against
// the reference model on random states.
module tb_lorenz_eq;
  import chaos_pkg::*;
  import tb_ref_pkg::*;

  state_t x, y, z, xn, yn, zn;
  int checks = 0, failures = 0;

  lorenz_eq dut (.x(x), .y(y), .z(z), .x_next(xn), .y_next(yn), .z_next(zn));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rx, ry, rz, ex, ey, ez;
    rx = FIG_X0; ry = FIG_Y0; rz = FIG_Z0;
    // Trajectory of the timing diagram: DUT output must equal the printed X.
    for (int i = 1; i < FIG_LEN; i++) begin
      x = state_t'(rx); y = state_t'(ry); z = state_t'(rz);
      #1;
      checks++;
      if (int'(xn) != FIG_X[i]) begin
        failures++;
        $display("FAIL step %0d: x_next=%0d expected %0d", i, xn, FIG_X[i]);
      end
      rx = int'(xn); ry = int'(yn); rz = int'(zn);
    end
    // Random states, all three outputs against the reference.
    for (int i = 0; i < 3000; i++) begin
      x = state_t'($urandom); y = state_t'($urandom); z = state_t'($urandom);
      #1;
      ref_step(int'(x), int'(y), int'(z), ex, ey, ez);
      checks++;
      if (int'(xn) != ex || int'(yn) != ey || int'(zn) != ez) begin
        failures++;
        if (failures < 10)
          $display("FAIL random %0d/%0d/%0d -> %0d/%0d/%0d expected %0d/%0d/%0d",
                   x, y, z, xn, yn, zn, ex, ey, ez);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
