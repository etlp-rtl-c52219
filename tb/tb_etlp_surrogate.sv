// tb_etlp_surrogate -- exhaustive check of the triangular surrogate.
//
// Sweeps every 16-bit voltage and compares the output with
// max(0, 1.0 - |v|) computed here in integer arithmetic (1.0 = 256), with
// |most negative| taken as the most positive value. Also checks the
// published example: 0.25 gives 0.75.
module tb_etlp_surrogate;
  logic signed [15:0] voltage, grad;
  int checks = 0, failures = 0;

  etlp_surrogate dut (.voltage(voltage), .grad(grad));

  function automatic int ref_surr(int v);
    int a;
    a = (v < 0) ? -v : v;
    if (a > 32767) a = 32767;
    return (256 - a > 0) ? 256 - a : 0;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    voltage = 16'sd64;             // 0.25
    #1;
    checks++;
    if (grad !== 16'sd192) begin   // 0.75
      failures++;
      $display("FAIL example: surrogate(0.25) = %0d, expected 192", grad);
    end
    for (int v = -32768; v <= 32767; v++) begin
      voltage = 16'(v);
      #1;
      checks++;
      if (int'(grad) != ref_surr(v)) begin
        failures++;
        if (failures < 10) $display("FAIL v=%0d grad=%0d exp=%0d", v, grad, ref_surr(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
