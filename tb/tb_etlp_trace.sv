// tb_etlp_trace -- checks the trace update against an integer model.
//
// Model: out = min(32767, t - floor(t / 8) + (spike ? 256 : 0)) for every
// non-negative 16-bit trace t and both spike values, plus the published
// example: trace 1.0 with a spike becomes 1.875.
module tb_etlp_trace;
  logic               spike;
  logic signed [15:0] trace_in, trace_out;
  int checks = 0, failures = 0;

  etlp_trace dut (.spike(spike), .trace_in(trace_in), .trace_out(trace_out));

  function automatic int ref_trace(int t, bit s);
    int r;
    r = t - t / 8 + (s ? 256 : 0);
    return (r > 32767) ? 32767 : r;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spike = 1'b1; trace_in = 16'sd256;   // 1.0
    #1;
    checks++;
    if (trace_out !== 16'sd480) begin    // 1.875
      failures++;
      $display("FAIL example: %0d, expected 480", trace_out);
    end
    for (int t = 0; t <= 32767; t++) begin
      for (int s = 0; s < 2; s++) begin
        trace_in = 16'(t);
        spike    = 1'(s);
        #1;
        checks++;
        if (int'(trace_out) != ref_trace(t, 1'(s))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d s=%0d out=%0d exp=%0d", t, s, trace_out, ref_trace(t, 1'(s)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
