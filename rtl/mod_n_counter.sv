// mod_n_counter: the "%N" block of the key generator.
//
// Counts generator steps modulo N and raises `hit` during the step whose count
// is N-1, so that one step in every N is perturbed. The count advances only on
// cycles with `step` high (the divided Lorenz clock used as a clock enable).
// N = 0 never raises `hit`: that setting turns the perturbation off, which is
// the "perturbation off" case the link is compared against. N = 1 perturbs
// every step. `hit` is combinational from the count and N; the count is cleared
// by reset.
module mod_n_counter #(
  parameter int unsigned NW = 14
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          step,
  input  logic [NW-1:0] n,
  output logic          hit
);

  logic [NW-1:0] cnt;

  assign hit = (n != '0) && (cnt == n - NW'(1));

  always_ff @(posedge clk) begin
    if (rst)
      cnt <= '0;
    else if (step)
      cnt <= hit ? '0 : cnt + NW'(1);
  end

endmodule
