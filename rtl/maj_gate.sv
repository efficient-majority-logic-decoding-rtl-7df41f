// maj_gate -- threshold (majority) gate.
//
// out is 1 when at least THRESH of the N_IN inputs are 1. In the two-step
// majority-logic decoder of RM(r,m) every gate has 2^(m-r)-2 inputs and
// fires on at least 2^(m-r-1) ones, which for RM(2,5) is 4 of 6; those are
// the defaults. The gate is realised as a population count compared with
// the threshold, the simplest circuit with this function; a synthesis tool
// flattens it into a small sum-of-products. Purely combinational.
module maj_gate #(
  parameter int unsigned N_IN   = 6,
  parameter int unsigned THRESH = 4
) (
  input  logic [N_IN-1:0] in_bits,
  output logic            out
);

  localparam int unsigned CW = $clog2(N_IN + 1);

  logic [CW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int unsigned i = 0; i < N_IN; i++) ones += CW'(in_bits[i]);
  end

  assign out = (32'(ones) >= THRESH);

endmodule
