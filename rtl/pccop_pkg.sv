// pccop_pkg: constants, types and small functions shared by the pc-COP
// p-bit accelerator.
//
// Number formats used throughout:
//   * p-bit state: one bit, 0 stands for -1 and 1 for +1.
//   * J coefficient: two bits, 11 = -1, 00 = 0, 01 = +1 (10 is unused).
//   * beta and the annealing rate: unsigned Q4.20 (24 bits).
//   * rand(-1,+1): signed Q1.20 (21 bits) straight from an LFSR.
//   * activation output: signed Q2.20 (22 bits), always within [-1,+1].
// The widths and encodings follow the published design; the instruction
// bit positions and the FSM state set are this implementation's choice.
package pccop_pkg;

  // Fixed-point formats
  localparam int unsigned BETA_W    = 24;  // Q4.20
  localparam int unsigned FRAC_W    = 20;
  localparam int unsigned LFSR_W    = 21;  // Q1.20, signed
  localparam int unsigned ACT_W     = 22;  // Q2.20, signed

  // Top-level interface widths
  localparam int unsigned SEED_W    = 512;
  localparam int unsigned JDATA_W   = 32;
  localparam int unsigned JADDR_W   = 18;
  localparam int unsigned INSTR_W   = 32;
  localparam int unsigned CNT_W     = 13;  // width of the Nm and Ns fields

  // Instruction register, packed MSB first in the order start, config,
  // debug, Nm, Ns.
  typedef struct packed {
    logic [3:0]       start;
    logic             cfg;
    logic             debug;
    logic [CNT_W-1:0] nm;
    logic [CNT_W-1:0] ns;
  } instr_t;

  // p-circuit controller states
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_CONFIG = 3'd1,
    ST_FETCH  = 3'd2,
    ST_UPDATE = 3'd3,
    ST_DONE   = 3'd4
  } state_t;

  // Value of a 2-bit J code as an integer (-1, 0, +1).
  function automatic int j_value(input logic [1:0] j);
    case (j)
      2'b01:   return 1;
      2'b11:   return -1;
      default: return 0;
    endcase
  endfunction

endpackage
