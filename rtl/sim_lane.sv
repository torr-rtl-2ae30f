// sim_lane: one class lane of the shared bipolar similarity micro-kernel.
// A bipolar product q*h is an XNOR of the bit encodings (bit 1 = +1, bit 0 = -1),
// so a lane adds +step to its accumulator when the query bit and the concept bit
// agree and -step when they differ. In full mode step = 1 (one column of the
// dot product); in delta mode step = 2, the exact correction
// (q_new - q_old) * h = 2 * q_new * h for a flipped query bit. Both follow the
// paper; the lane is purely combinational, the accumulator register lives in
// the aligner. Accumulators hold the integer dot product; normalisation by D'
// is a later shift.
module sim_lane #(
  parameter int unsigned ACCW = 15
) (
  input  logic                   q_bit,   // query bit of this column
  input  logic                   h_bit,   // concept bit of this lane's class
  input  logic                   delta,   // 0: +/-1 (full), 1: +/-2 (delta)
  input  logic signed [ACCW-1:0] acc_in,
  output logic signed [ACCW-1:0] acc_out
);
  logic                   match;
  logic signed [ACCW-1:0] step;

  always_comb begin
    match   = ~(q_bit ^ h_bit);
    step    = delta ? ACCW'(signed'(2)) : ACCW'(signed'(1));
    acc_out = match ? acc_in + step : acc_in - step;
  end
endmodule
