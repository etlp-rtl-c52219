// etlp_trace_mem -- block RAM holding one pre-synaptic trace per address.
//
// A single-port synchronous RAM of 2^ADDR_W words of DATA_W bits: when re is
// high the word at addr appears on rdata after the clock edge and is held
// there while re stays low; when we is high wdata is written at the edge.
// The ETLP sequencer never reads and writes in the same cycle. With the
// default 2048 x 16 bits it fits in one 36 Kb FPGA block RAM, the single
// tile the original module used; depth and width are this design's choice.
// The contents start at zero, as a block RAM does after configuration; there
// is no reset of the array.
module etlp_trace_mem #(
  parameter int unsigned ADDR_W = etlp_pkg::ADDR_W_DEF,
  parameter int unsigned DATA_W = etlp_pkg::DATA_W_DEF
) (
  input  logic              clk,
  input  logic              re,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  initial begin
    for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end

endmodule
