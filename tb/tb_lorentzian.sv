// tb_lorentzian: sweeps the whole useful input range of the Lorentzian neuron transfer
// function and compares each output with sigma(x) = x^2/(x^2+(0.3+0.25x)^2) evaluated in
// floating point; allowed error 3 LSB (1/4096 each).
module tb_lorentzian;
  import prnn_pkg::*;
  data_t x, y;
  int checks = 0, failures = 0;
  lorentzian dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, ref_y, err;
    for (int v = -32768; v < 32768; v += 37) begin
      x = data_t'(v);
      #1;
      xr = real'(v) / 4096.0;
      ref_y = (xr * xr) / (xr * xr + (0.3 + 0.25 * xr) * (0.3 + 0.25 * xr));
      err = real'(y) / 4096.0 - ref_y;
      checks++;
      if (err > 3.0/4096.0 || err < -3.0/4096.0) begin
        failures++;
        if (failures < 10) $display("x=%f y=%f ref=%f", xr, real'(y)/4096.0, ref_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
