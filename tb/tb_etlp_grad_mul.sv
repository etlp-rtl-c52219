// tb_etlp_grad_mul -- checks the two fixed-point products.
//
// The reference uses real arithmetic: floor(a * b / 256), clamped to the
// 16-bit range, applied twice. Covers the published example
// (1.875 x 0.75 = 1.40625, x 2 = 2.8125), negative teaching values, zero
// teaching, saturation and random operands.
module tb_etlp_grad_mul;
  logic signed [15:0] trace, surr, teaching, pre_post, gradient;
  int checks = 0, failures = 0;

  etlp_grad_mul dut (.trace(trace), .surr(surr), .teaching(teaching),
                     .pre_post(pre_post), .gradient(gradient));

  function automatic int ref_mul(int a, int b);
    real p;
    int r;
    p = $floor(real'(a) * real'(b) / 256.0);
    if (p > 32767.0) return 32767;
    if (p < -32768.0) return -32768;
    r = int'(p);
    return r;
  endfunction

  task automatic check(int t, int s, int k);
    int pp, g;
    trace = 16'(t); surr = 16'(s); teaching = 16'(k);
    #1;
    pp = ref_mul(t, s);
    g  = ref_mul(pp, k);
    checks++;
    if (int'(pre_post) != pp || int'(gradient) != g) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0d s=%0d k=%0d: pp=%0d/%0d g=%0d/%0d", t, s, k, pre_post, pp, gradient, g);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(480, 192, 512);
    checks++;
    if (pre_post !== 16'sd360 || gradient !== 16'sd720) begin
      failures++;
      $display("FAIL example: pre_post=%0d gradient=%0d", pre_post, gradient);
    end
    check(480, 192, -512);
    check(480, 192, 0);
    check(32767, 256, 32767);    // saturates high
    check(32767, 256, -32768);   // saturates low
    check(-300, 7, 3);           // rounding toward minus infinity
    for (int i = 0; i < 20000; i++)
      check($urandom_range(0, 32767), $urandom_range(0, 256), int'($urandom_range(0, 65535)) - 32768);
    for (int i = 0; i < 20000; i++)
      check(int'($urandom_range(0, 65535)) - 32768, int'($urandom_range(0, 65535)) - 32768,
            int'($urandom_range(0, 65535)) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
