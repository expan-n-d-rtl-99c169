// tb_relu_act -- self-checking test of the ReLU output stage.
//
// Applies corner values (zero, -1, the clipping threshold, the extremes of
// the 3M-bit range) and random sums to relu_act at its default size (24-bit
// sum, 8-bit output, 7 fraction bits dropped) and compares with
// max(0, min(sum / 128, 127)) computed with integer arithmetic.
module tb_relu_act;
  int checks = 0;
  int failures = 0;

  logic signed [23:0] sum;
  logic signed [7:0]  act;
  logic               sat;

  relu_act dut (.sum_i(sum), .act_o(act), .sat_o(sat));

  task automatic apply(int s);
    int e;
    bit es;
    sum = 24'(s);
    #1;
    if (s < 0)              begin e = 0;   es = 0; end
    else if (s / 128 > 127) begin e = 127; es = 1; end
    else                    begin e = s / 128; es = 0; end
    checks++;
    if (int'(act) != e || sat != es) begin
      failures++;
      $display("FAIL sum=%0d: got %0d sat=%0b, expected %0d sat=%0b", s, act, sat, e, es);
    end
  endtask

  initial begin
    int corner [10] = '{0, -1, 127, 128, 16383, 16384, 16256, -8388608, 8388607, 255};
    foreach (corner[i]) apply(corner[i]);
    repeat (2000) apply(int'($urandom_range(0, 32'hFFFFFF)) - 8388608);
    repeat (2000) apply(int'($urandom_range(0, 20000)) - 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
