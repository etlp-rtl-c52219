// etlp_pkg -- types and helpers shared by the ETLP gradient module.
//
// All datapath values are signed two's-complement fixed point numbers of
// DATA_W bits with FRAC_W fractional bits (defaults 16 and 8, so 1.0 is
// 256). The number format is this design's choice; the timing diagram of
// the original module only prints decimal values (0.25, 0.75, 1.875,
// 1.40625, 2.8125), all of which are exact in this format.
//
// The sequencer has the three states named in that timing diagram:
// init, read and write.
package etlp_pkg;

  parameter int unsigned DATA_W_DEF = 16;
  parameter int unsigned FRAC_W_DEF = 8;
  parameter int unsigned ADDR_W_DEF = 11;     // 2048 traces: one 36 Kb block RAM
  parameter int unsigned DECAY_SHIFT_DEF = 3; // alpha = 1 - 2^-3 = 0.875

  typedef enum logic [1:0] {
    ST_INIT  = 2'd0,
    ST_READ  = 2'd1,
    ST_WRITE = 2'd2
  } state_e;

endpackage
