// tb_etlp_trace_mem -- checks the trace RAM against an array model.
//
// Checks that every word reads zero after start-up, then performs random
// writes and reads (inputs driven on the falling edge), comparing each read
// with the model one cycle later, and checks that rdata holds its value
// while re is low.
module tb_etlp_trace_mem;
  localparam int AW = 11;
  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [2**AW];
  int checks = 0, failures = 0;

  etlp_trace_mem dut (.clk(clk), .re(re), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a);
    @(negedge clk); re = 1; we = 0; addr = AW'(a);
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      if (failures < 10) $display("FAIL read %0d: %h exp %h", a, rdata, model[a]);
    end
  endtask

  task automatic wr(int a, logic [15:0] d);
    @(negedge clk); we = 1; re = 0; addr = AW'(a); wdata = d;
    model[a] = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    logic [15:0] held;
    foreach (model[i]) model[i] = '0;
    for (int a = 0; a < 2**AW; a++) rd(a);
    for (int i = 0; i < 6000; i++) begin
      if ($urandom_range(0, 1)) wr($urandom_range(0, 2**AW - 1), 16'($urandom));
      else rd($urandom_range(0, 2**AW - 1));
    end
    // rdata holds while re is low, even across writes
    rd(5);
    held = rdata;
    wr(5, ~held);
    wr(6, 16'h1234);
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) begin
      failures++;
      $display("FAIL hold: %h exp %h", rdata, held);
    end
    rd(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
