// tb_etlp_workloads -- one neuron's worth of ETLP updates for the evaluated
// network sizes, at the module's default parameters.
//
// A neuron served by one ETLP module needs one update per incoming synapse
// per time step. For each case below the testbench sweeps every pre-synaptic
// address once per time step, back to back, for 100 time steps (one sample),
// with random pre-synaptic spikes (rate about 1 in 5), random membrane
// voltages in [-2, 2] and a fixed teaching value that is present in every
// step (a teaching neuron firing at 100 Hz with 10 ms steps). Every gradient
// is compared with a model kept here, and the total cycle count must equal
// synapses x 100 x 3:
//   SHD recurrent hidden neuron: 700 input + 450 recurrent synapses,
//                                 345,000 cycles per one-second sample
//   SHD output neuron:           450 synapses
//   N-MNIST output neuron:       200 synapses
// An N-MNIST hidden neuron (2064 input synapses) needs more traces than the
// default 2048-entry memory holds and is not run.
module tb_etlp_workloads;
  localparam int AW = 11;
  localparam int DEPTH = 2**AW;
  localparam int STEPS = 100;

  logic clk = 0, rst_n = 0, step_i = 0, spike = 0;
  logic [AW-1:0] addr = '0;
  logic signed [15:0] voltage = '0, teaching = '0, gradient;
  logic step_o;
  int checks = 0, failures = 0;
  int cyc = 0;
  int model_tr [DEPTH];
  int n_done;

  etlp dut (.clk(clk), .rst_n(rst_n), .step_i(step_i), .addr(addr), .spike(spike),
            .voltage(voltage), .teaching(teaching), .gradient(gradient), .step_o(step_o));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fl_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    if (p >= 0) p = p / 256;
    else        p = -((-p + 255) / 256);
    if (p > 32767)  return 32767;
    if (p < -32768) return -32768;
    return int'(p);
  endfunction

  // Runs n_pre synapses x STEPS time steps back to back from the current
  // falling edge; returns at the falling edge of the last step_o.
  task automatic run_neuron(string name, int n_pre, int teach);
    int t0, cycles, tr, sr, g, v, av;
    bit s;
    t0 = cyc;
    for (int st = 0; st < STEPS; st++) begin
      v = int'($urandom_range(0, 1024)) - 512;   // post-synaptic voltage for this step
      for (int a = 0; a < n_pre; a++) begin
        s = ($urandom_range(0, 4) == 0);
        addr = AW'(a); spike = s; voltage = 16'(v); teaching = 16'(teach);
        step_i = 1;
        @(negedge clk); step_i = 0;
        repeat (2) @(negedge clk);
        tr = model_tr[a] - model_tr[a] / 8 + (s ? 256 : 0);
        model_tr[a] = tr;
        av = (v < 0) ? -v : v;
        sr = (av < 256) ? 256 - av : 0;
        g  = fl_mul(fl_mul(tr, sr), teach);
        checks++;
        if (!step_o || int'(gradient) != g) begin
          failures++;
          if (failures < 20)
            $display("FAIL %s step %0d addr %0d: step_o=%0d gradient %0d expected %0d",
                     name, st, a, step_o, gradient, g);
        end
        n_done++;
      end
    end
    cycles = cyc - t0;
    checks++;
    if (cycles != n_pre * STEPS * 3) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d", name, cycles, n_pre * STEPS * 3);
    end
    $display("%s: %0d synapses x %0d steps = %0d updates in %0d cycles",
             name, n_pre, STEPS, n_pre * STEPS, cycles);
  endtask

  initial begin
    foreach (model_tr[i]) model_tr[i] = 0;
    n_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run_neuron("SHD recurrent hidden", 700 + 450, 77);
    run_neuron("SHD output", 450, -256);
    run_neuron("N-MNIST output", 200, 300);
    checks++;
    if (n_done != (1150 + 450 + 200) * STEPS) begin
      failures++;
      $display("FAIL: %0d updates done", n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
