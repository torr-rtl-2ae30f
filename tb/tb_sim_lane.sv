// tb_sim_lane: exhaustive test of the bipolar similarity lane. For every query
// bit, concept bit and mode it checks acc_out against the bipolar arithmetic
// written out directly: acc + step * (+1 if the bits agree, -1 otherwise),
// step = 1 in full mode and 2 in delta mode, over random accumulator values.
module tb_sim_lane;
  localparam int unsigned ACCW = 15;
  logic q_bit, h_bit, delta;
  logic signed [ACCW-1:0] acc_in, acc_out;
  int checks = 0, failures = 0;

  sim_lane #(.ACCW(ACCW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int qv, hv, exp;
    for (int r = 0; r < 200; r++)
      for (int v = 0; v < 8; v++) begin
        {q_bit, h_bit, delta} = 3'(v);
        acc_in = ACCW'($urandom_range(8000, 0)) - ACCW'(4000);
        #1;
        qv  = q_bit ? 1 : -1;
        hv  = h_bit ? 1 : -1;
        exp = int'(acc_in) + (delta ? 2 : 1) * qv * hv;
        checks++;
        if (int'(acc_out) != exp) begin
          failures++;
          $display("FAIL: q=%0d h=%0d delta=%0d acc=%0d -> %0d exp %0d", q_bit, h_bit, delta, acc_in, acc_out, exp);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
