// tb_exp_unit: checks the Q8.8 exponential against the real exp() over the
// whole input range used by Softmax (x <= 0) and into saturation. The accepted
// error is 7 % of the true value plus 2 LSB, the bound of the linear 2^f
// approximation plus rounding.
module tb_exp_unit;
  import flat_pkg::*;
  localparam int N = 8;
  lane_t x [N], y [N];
  int checks = 0, failures = 0;

  exp_unit #(.N(N)) dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -6000; v < 2000; v += N) begin
      for (int i = 0; i < N; i++) x[i] = lane_t'(v + i);
      #1;
      for (int i = 0; i < N; i++) begin
        real ref_v, err;
        ref_v = $exp(real'(v + i) / 256.0) * 256.0;
        checks++;
        if (ref_v >= 32767.0) begin
          if (y[i] < 16'sd30000) begin
            failures++;
            $display("FAIL sat x=%0d y=%0d", v + i, y[i]);
          end
        end else begin
          err = real'(y[i]) - ref_v;
          if (err < 0) err = -err;
          if (err > 0.07 * ref_v + 2.0) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d y=%0d ref=%f", v + i, y[i], ref_v);
          end
        end
      end
    end
    // exact points of the formula
    x[0] = 0; x[1] = -16'sd256; #1;
    checks++; if (y[0] != 16'sd256) begin failures++; $display("FAIL exp(0)=%0d", y[0]); end
    checks++; if (y[1] != 16'sd99)  begin failures++; $display("FAIL exp(-1)=%0d", y[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
