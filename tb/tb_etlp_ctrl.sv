// tb_etlp_ctrl -- checks the init/read/write sequence of the control unit.
//
// For single and back-to-back requests it checks, cycle by cycle, the
// state, the memory read/write strobes, the gradient load strobe and the
// one-cycle step_o pulse, and that back-to-back updates take three cycles
// each. Inputs change on the falling edge; outputs are sampled there too.
module tb_etlp_ctrl;
  import etlp_pkg::*;
  logic clk = 0, rst_n = 0, step_i = 0;
  logic mem_re, mem_we, grad_load, step_o;
  state_e state;
  int checks = 0, failures = 0;
  int cyc = 0;

  etlp_ctrl dut (.clk(clk), .rst_n(rst_n), .step_i(step_i), .mem_re(mem_re), .mem_we(mem_we),
                 .grad_load(grad_load), .step_o(step_o), .state(state));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_sig(state_e s, bit re, bit we, bit gl, bit so, string what);
    checks++;
    if (state !== s || mem_re !== re || mem_we !== we || grad_load !== gl || step_o !== so) begin
      failures++;
      $display("FAIL %s: state=%0d re=%0d we=%0d gl=%0d so=%0d", what, state, mem_re, mem_we, grad_load, step_o);
    end
  endtask

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_sig(ST_INIT, 0, 0, 0, 0, "idle");
    // single request
    step_i = 1;
    #1 expect_sig(ST_INIT, 1, 0, 0, 0, "accept");
    @(negedge clk); step_i = 0;
    expect_sig(ST_READ, 0, 0, 1, 0, "read");
    @(negedge clk);
    expect_sig(ST_WRITE, 0, 1, 0, 0, "write");
    @(negedge clk);
    expect_sig(ST_INIT, 0, 0, 0, 1, "done");
    @(negedge clk);
    expect_sig(ST_INIT, 0, 0, 0, 0, "idle again");
    repeat (3) @(negedge clk);
    expect_sig(ST_INIT, 0, 0, 0, 0, "stays idle");
    // ten back-to-back requests
    t0 = cyc;
    for (int k = 0; k < 10; k++) begin
      step_i = 1;
      #1 expect_sig(ST_INIT, 1, 0, 0, (k != 0), "b2b accept");
      @(negedge clk); step_i = 0;
      expect_sig(ST_READ, 0, 0, 1, 0, "b2b read");
      @(negedge clk);
      expect_sig(ST_WRITE, 0, 1, 0, 0, "b2b write");
      @(negedge clk);
      expect_sig(ST_INIT, 0, 0, 0, 1, "b2b done");
    end
    checks++;
    if (cyc - t0 != 30) begin
      failures++;
      $display("FAIL: 10 updates took %0d cycles, expected 30", cyc - t0);
    end
    // reset in the middle of an update
    step_i = 1;
    @(negedge clk); step_i = 0;
    rst_n = 0;
    #1 expect_sig(ST_INIT, 0, 0, 0, 0, "reset");
    @(negedge clk); rst_n = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
