// tb_elu: sweeps the input range of the ELU activation and compares with x (x > 0) or
// exp(x) - 1 (x <= 0) evaluated in floating point; allowed error 6 LSB (about 0.15%).
module tb_elu;
  import prnn_pkg::*;
  data_t x, y;
  int checks = 0, failures = 0;
  elu dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, ref_y, err;
    for (int v = -32768; v < 32768; v += 29) begin
      x = data_t'(v);
      #1;
      xr = real'(v) / 4096.0;
      ref_y = (xr > 0.0) ? xr : $exp(xr) - 1.0;
      err = real'(y) / 4096.0 - ref_y;
      checks++;
      if (err > 6.0/4096.0 || err < -6.0/4096.0) begin
        failures++;
        if (failures < 10) $display("x=%f y=%f ref=%f", xr, real'(y)/4096.0, ref_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
