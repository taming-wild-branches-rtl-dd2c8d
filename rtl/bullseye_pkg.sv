// bullseye_pkg -- types, constants and helper functions shared by the Bullseye
// hard-to-predict (H2P) branch subsystem.
//
// The branch PC is carried as 62 bits, the width the storage budget of the
// design assumes for every stored H2P PC (a 64-bit PC without its two
// always-zero low bits). The two-bit confidence field that each perceptron
// hands to the arbiter is a packed struct: one bit for "running win-rate over
// TAGE-SC-L is high", one for "|output| is above the dynamic threshold".
// The 32-bit xor-shift scrambler is the hash family used to index the local
// perceptron's weight tables; its shift constants (13, 17, 5) are the classic
// Marsaglia ones and are this design's choice.
package bullseye_pkg;

  localparam int unsigned PC_W = 62;
  typedef logic [PC_W-1:0] pc_t;

  // Two-bit perceptron confidence field passed to the arbiter.
  typedef struct packed {
    logic win_high;   // running win-rate over TAGE-SC-L at or above 55 %
    logic mag_high;   // |output| > theta for this instance
  } conf_t;

  // Which engine supplied the final prediction.
  typedef enum logic [1:0] {
    SRC_TAGE   = 2'd0,
    SRC_LOCAL  = 2'd1,
    SRC_GLOBAL = 2'd2
  } pred_src_t;

  // One pulse per mechanism, for monitoring and test coverage.
  typedef struct packed {
    logic h2p_flag;      // HIT declared a branch H2P-active
    logic fifo_drop;     // a flagged PC found a full FIFO and was dropped
    logic local_alloc;   // local H2P cache admitted a PC
    logic global_alloc;  // global H2P cache admitted a PC
    logic local_evict;   // local H2P cache evicted an entry to admit a PC
    logic global_evict;  // global H2P cache evicted an entry to admit a PC
    logic perc_override;     // a perceptron prediction replaced TAGE-SC-L's
    logic filtered;      // TAGE-SC-L update suppressed for this branch
  } events_t;

  // 32-bit xor-shift scrambler.
  function automatic logic [31:0] xorshift32(input logic [31:0] x_in);
    logic [31:0] x;
    x = x_in;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // Fold a PC into 32 bits by XOR.
  function automatic logic [31:0] pc_fold32(input pc_t pc);
    return pc[31:0] ^ {2'b00, pc[61:32]};
  endfunction

  // Fold a PC into the 16-bit HIT tag by XOR.
  function automatic logic [15:0] pc_fold16(input pc_t pc);
    return pc[15:0] ^ pc[31:16] ^ pc[47:32] ^ {2'b00, pc[61:48]};
  endfunction

endpackage
