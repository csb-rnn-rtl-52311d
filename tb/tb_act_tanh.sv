// tb_act_tanh: checks act_tanh against the exact tanh (real arithmetic)
// over the input range; the approximation must stay within 0.05 of it,
// be odd-symmetric within one LSB and be monotonic. A coarse sweep of the
// whole 16-bit input range checks that large inputs saturate to +-1.
module tb_act_tanh;
  import csb_pkg::*;
  data_t x, y, yn;
  int checks = 0, failures = 0;
  act_tanh dut (.x, .y);
  initial begin
    real xr, ref_y, yr, prev;
    prev = -2.0;
    for (int i = -2000; i <= 2000; i += 5) begin
      x = data_t'(i); #1;
      xr = real'(i) / 256.0;
      ref_y = ($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr));
      yr = real'(y) / 256.0;
      checks++;
      if (yr - ref_y > 0.05 || ref_y - yr > 0.05 || yr < prev) begin
        failures++; $display("x=%f y=%f ref=%f", xr, yr, ref_y);
      end
      prev = yr;
    end
    for (int i = 1; i < 2000; i += 37) begin
      x = data_t'(i); #1; yn = y; x = data_t'(-i); #1;
      checks++;
      if (int'(yn) + int'(y) > 1 || int'(yn) + int'(y) < -1) begin
        failures++; $display("asym at %0d: %0d %0d", i, yn, y);
      end
    end
    for (int i = -32768; i <= 32767; i += 97) begin
      x = data_t'(i); #1;
      xr = real'(i) / 256.0;
      ref_y = ($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr));
      yr = real'(y) / 256.0;
      checks++;
      if (yr - ref_y > 0.05 || ref_y - yr > 0.05) begin
        failures++; if (failures < 10) $display("x=%f y=%f ref=%f", xr, yr, ref_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
