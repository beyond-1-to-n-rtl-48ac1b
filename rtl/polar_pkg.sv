// polar_pkg: constants and types shared by the rateless polar decoder.
//
// The default sizes follow the decoder the design is built for: list size
// L = 8, maximum code length N_max = 1024, minimum (mother) length
// N_min = 512, and a 16-bit CRC appended to the message. The LLR and
// path-metric widths, the number of processing lanes, the fixed-point width
// of the scheduler's Bhattacharyya parameters and the CRC polynomial are
// choices of this implementation (the 5G NR CRC16, x^16+x^12+x^5+1).
package polar_pkg;

  localparam int unsigned NMAX_DEF  = 1024;  // maximum code length
  localparam int unsigned NMIN_DEF  = 512;   // mother (first transmission) length
  localparam int unsigned LIST_DEF  = 8;     // SCL list size
  localparam int unsigned LLR_W_DEF = 8;     // LLR width, two's complement
  localparam int unsigned PM_W_DEF  = 16;    // path-metric width, unsigned
  localparam int unsigned LANES_DEF = 32;    // processing lanes per path
  localparam int unsigned Z_W_DEF   = 16;    // Bhattacharyya-parameter width of the scheduler

  localparam int unsigned CRC_W      = 16;
  localparam logic [15:0] CRC16_POLY = 16'h1021;

  // Operation of one lane when a parent node of the decoding tree produces
  // the LLRs of the child that holds the current target bit.
  //   OP_F    target in upper child, lower sibling not yet known (f, min-sum)
  //   OP_G    target in lower child, upper sibling known           (g)
  //   OP_H    target in upper child, lower sibling known           (h)
  //   OP_PASS target in lower child, upper sibling not yet known  (lower LLR)
  typedef enum logic [1:0] {OP_F = 2'd0, OP_G = 2'd1, OP_H = 2'd2, OP_PASS = 2'd3} pe_op_e;

  // Configuration tables of the decoder top.
  typedef enum logic [2:0] {
    CFG_INFO  = 3'd0,  // info_mask[addr]  <= data[0]
    CFG_MSG   = 3'd1,  // msg_mask[addr]   <= data[0]
    CFG_COPY  = 3'd2,  // copy_next[addr]  <= data
    CFG_SCHED = 3'd3,  // sched[addr]      <= data
    CFG_LEN   = 3'd4,  // sched_len        <= data
    CFG_IP    = 3'd5,  // ip_mask[addr]    <= data[0] (input of the reverse mapping)
    CFG_IQ    = 3'd6   // iq_mask[addr]    <= data[0]
  } cfg_sel_e;

endpackage
