// mmm_pkg: types and helpers shared by the three-dimensional systolic matrix
// multiplication design.
//
// fp32_t is an IEEE-754 single-precision word, the only number format the
// design handles. phase_e names the phases a block of C goes through: a first
// Read of one column block of A and one row block of B (phase 1), Read
// overlapped with Compute (phase 2), Compute alone (phase 3), a pipeline drain
// and the Write of the finished block (phase 4). The drain state is this
// design's own: it waits for the last results to leave the array before the
// C FIFOs are read out.
package mmm_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_READ    = 3'd1,  // phase 1: Read (and initialise C)
    PH_RD_COMP = 3'd2,  // phase 2: Read of step k+1 overlapped with Compute of step k
    PH_COMP    = 3'd3,  // phase 3: Compute of the last step
    PH_DRAIN   = 3'd4,  // results of the last step leave the array
    PH_WRITE   = 3'd5   // phase 4: Write of the C block
  } phase_e;

  // Latency, in cycles, of dot_product_unit for a given size: one multiplier
  // stage, ceil(log2(dp)) adder-tree stages and the stage adding z.
  function automatic int dot_latency(input int dp);
    return 2 + $clog2(dp);
  endfunction

endpackage
