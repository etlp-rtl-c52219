// tb_etlp -- end-to-end test of the ETLP gradient module at its default size.
//
// Drives the module as an upper module would: operands and step_i change on
// the falling edge, step_i is a one-cycle pulse, and operands are held until
// step_o. A model kept here (an integer trace per address, the decay
// t - t/8 plus 1.0 per spike, max(0, 1 - |v|), and floor-rounded, clamped
// products) predicts every gradient. Checked for every update: step_o comes
// exactly three cycles after the step_i edge and lasts one cycle, and the
// gradient matches the model. Also checked: the published example (trace 1
// becomes 1.875, voltage 0.25, teaching 2 give pre_post 1.40625 and gradient
// 2.8125), traces of all 2048 addresses, and that a reset leaves the stored
// traces intact. Each mechanism exercised is counted and must occur.
module tb_etlp;
  import etlp_pkg::*;
  localparam int AW = 11;
  localparam int DEPTH = 2**AW;

  logic clk = 0, rst_n = 0, step_i = 0, spike = 0;
  logic [AW-1:0] addr = '0;
  logic signed [15:0] voltage = '0, teaching = '0, gradient;
  logic step_o;
  int checks = 0, failures = 0;
  int cyc = 0;
  int model_tr [DEPTH];

  // mechanism counters
  int n_spike, n_nospike, n_surr_zero, n_neg_v, n_neg_teach, n_zero_teach,
      n_grad_sat, n_b2b, n_gap, n_example;

  etlp dut (.clk(clk), .rst_n(rst_n), .step_i(step_i), .addr(addr), .spike(spike),
            .voltage(voltage), .teaching(teaching), .gradient(gradient), .step_o(step_o));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fl_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    // floor division by 256
    if (p >= 0) p = p / 256;
    else        p = -((-p + 255) / 256);
    if (p > 32767)  return 32767;
    if (p < -32768) return -32768;
    return int'(p);
  endfunction

  function automatic int surr_ref(int v);
    int a = (v < 0) ? -v : v;
    return (a < 256) ? 256 - a : 0;
  endfunction

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
  endtask

  // One update, started at the current falling edge. Returns at the falling
  // edge in which step_o is high, so a following call runs back to back.
  task automatic update(int a, bit s, int v, int k, output int g_out);
    int t0, tr, sr, pp, g;
    if (step_o) n_b2b++;   // issued in the step_o cycle of the previous update
    addr = AW'(a); spike = s; voltage = 16'(v); teaching = 16'(k);
    step_i = 1;
    t0 = cyc;
    @(negedge clk); step_i = 0;
    checks++; if (step_o) fail("step_o during read");
    @(negedge clk);
    checks++; if (step_o) fail("step_o during write");
    @(negedge clk);
    checks++;
    if (!step_o || cyc - t0 != 3) fail($sformatf("step_o late: %0d cycles", cyc - t0));
    tr = model_tr[a] - model_tr[a] / 8 + (s ? 256 : 0);
    if (tr > 32767) tr = 32767;
    model_tr[a] = tr;
    sr = surr_ref(v);
    pp = fl_mul(tr, sr);
    g  = fl_mul(pp, k);
    checks++;
    if (int'(gradient) != g)
      fail($sformatf("addr %0d s=%0d v=%0d k=%0d: gradient %0d, expected %0d", a, s, v, k, gradient, g));
    if (s) n_spike++; else n_nospike++;
    if (sr == 0) n_surr_zero++;
    if (v < 0 && sr != 0) n_neg_v++;
    if (k < 0 && g != 0) n_neg_teach++;
    if (k == 0) n_zero_teach++;
    if (g == 32767 || g == -32768) n_grad_sat++;
    g_out = g;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
    checks++;
    if (step_o) fail("step_o while idle");
    n_gap++;
  endtask

  initial begin
    int g;
    foreach (model_tr[i]) model_tr[i] = 0;
    {n_spike, n_nospike, n_surr_zero, n_neg_v, n_neg_teach, n_zero_teach,
     n_grad_sat, n_b2b, n_gap, n_example} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Published example: first spike brings trace 0 to 1.0, the second to
    // 1.875; voltage 0.25 (64), teaching 2 (512).
    update(7, 1, 64, 512, g);
    idle(2);
    update(7, 1, 64, 512, g);
    checks++;
    if (gradient !== 16'sd720)   // 2.8125 = 1.875 x 0.75 x 2
      fail($sformatf("example: gradient %0d, expected 720", gradient));
    else n_example++;
    idle(1);

    // Sweep every address once with a spike.
    for (int a = 0; a < DEPTH; a++) update(a, 1, 0, 256, g);
    idle(1);

    // Random traffic, mostly back to back, with idle gaps.
    for (int i = 0; i < 30000; i++) begin
      int a, v, k;
      bit s;
      a = $urandom_range(0, 15) == 0 ? $urandom_range(0, DEPTH - 1) : $urandom_range(0, 31);
      s = ($urandom_range(0, 2) == 0);
      case ($urandom_range(0, 3))
        0: v = int'($urandom_range(0, 65535)) - 32768;
        default: v = int'($urandom_range(0, 600)) - 300;
      endcase
      case ($urandom_range(0, 5))
        0: k = 0;
        1: k = int'($urandom_range(0, 65535)) - 32768;
        default: k = int'($urandom_range(0, 1024)) - 512;
      endcase
      update(a, s, v, k, g);
      if ($urandom_range(0, 9) == 0) begin
        idle($urandom_range(1, 4));
      end
    end

    // A reset clears the sequencer but not the stored traces.
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    checks++;
    if (step_o || gradient != 0) fail("reset did not clear outputs");
    @(negedge clk);
    update(7, 0, 0, 256, g);

    checks += 10;
    if (n_spike == 0)      fail("no update with a spike");
    if (n_nospike == 0)    fail("no update without a spike");
    if (n_surr_zero == 0)  fail("surrogate never clipped to zero");
    if (n_neg_v == 0)      fail("no negative voltage inside the triangle");
    if (n_neg_teach == 0)  fail("no negative teaching value");
    if (n_zero_teach == 0) fail("no zero teaching value");
    if (n_grad_sat == 0)   fail("gradient never saturated");
    if (n_b2b == 0)        fail("no back-to-back update");
    if (n_gap == 0)        fail("no idle gap");
    if (n_example == 0)    fail("published example not reproduced");
    $display("mechanisms: spike=%0d nospike=%0d surr_zero=%0d neg_v=%0d neg_teach=%0d zero_teach=%0d grad_sat=%0d b2b=%0d gap=%0d example=%0d",
             n_spike, n_nospike, n_surr_zero, n_neg_v, n_neg_teach, n_zero_teach, n_grad_sat, n_b2b, n_gap, n_example);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
