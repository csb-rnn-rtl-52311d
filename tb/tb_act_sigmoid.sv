// tb_act_sigmoid: checks act_sigmoid against the exact logistic function
// (computed in real arithmetic) over the whole useful input range; the
// piecewise-linear unit must stay within 0.025 of it and be monotonic.
module tb_act_sigmoid;
  import csb_pkg::*;
  data_t x, y;
  int checks = 0, failures = 0;
  act_sigmoid dut (.x, .y);
  initial begin
    real xr, ref_y, yr, prev;
    prev = -1.0;
    for (int i = -3000; i <= 3000; i += 7) begin
      x = data_t'(i); #1;
      xr = real'(i) / 256.0; ref_y = 1.0 / (1.0 + $exp(-xr)); yr = real'(y) / 256.0;
      checks++;
      if (yr - ref_y > 0.025 || ref_y - yr > 0.025 || yr < prev) begin
        failures++; $display("x=%f y=%f ref=%f", xr, yr, ref_y);
      end
      prev = yr;
    end
    x = 16'sh8000; #1; checks++; if (y != 0) failures++;
    x = 16'sh7fff; #1; checks++; if (y != 256) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
