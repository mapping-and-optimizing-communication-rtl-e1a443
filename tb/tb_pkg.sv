// tb_pkg -- message payload pattern shared by all testbenches.
//
// Every test message carries a seed in payload word 0, and payload word i > 0
// is a hash of (seed, i). Any receiver can therefore check a message it gets
// word by word without a copy of what was sent. IDs used by the testbench
// publishers are defined here too.
package tb_pkg;

  localparam logic [31:0] SW_PUB_ID  = 32'h0000_0C01;  // software publisher node
  localparam logic [31:0] HW_PUB_ID0 = 32'h0000_0D00;  // hardware publisher i uses HW_PUB_ID0 + i

  function automatic logic [31:0] payload_word(input logic [31:0] seed, input int unsigned i);
    logic [31:0] h;
    if (i == 0) return seed;
    h = seed ^ (32'(i) * 32'h9E37_79B1);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

endpackage
