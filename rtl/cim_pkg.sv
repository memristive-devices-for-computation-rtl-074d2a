// Shared types and constants of the two computation-in-memory accelerators.
//
// The Memristive Vector Processor (MVP) works on a memristive crossbar whose
// sense amplifiers can be given one of several reference currents, so that a
// read of one or two rows yields Read, OR, AND or XOR of the stored bits
// ("scouting logic"). The RRAM automata processor (RRAM-AP) evaluates a
// homogeneous non-deterministic automaton one input symbol per cycle with
// arrays of Boolean dot-product operators.
//
// The set of scouting operations (Read, AND, OR, XOR) follows the paper. The
// instruction encoding, the configuration targets of the automata processor
// and all widths here are this design's own choices.
package cim_pkg;

  // Reference current selected for the scouting-logic sense amplifiers.
  typedef enum logic [1:0] {
    SA_READ = 2'd0,   // one row active, Iref between Vr/RH and Vr/RL
    SA_OR   = 2'd1,   // two rows, Iref between 2Vr/RH and Vr/RL
    SA_AND  = 2'd2,   // two rows, Iref between Vr/RL and 2Vr/RL
    SA_XOR  = 2'd3    // two rows, window between Iref1 and Iref2
  } sa_ref_e;

  // MVP macro-instruction opcodes.
  typedef enum logic [2:0] {
    MVP_WRITE = 3'd0, // program one row of the crossbar (dataset preload)
    MVP_READ  = 3'd1, // read COUNT rows starting at ROW_A
    MVP_OR    = 3'd2, // row (ROW_A+i) OR  row (ROW_B+i), i = 0..COUNT-1
    MVP_AND   = 3'd3, // row (ROW_A+i) AND row (ROW_B+i)
    MVP_XOR   = 3'd4  // row (ROW_A+i) XOR row (ROW_B+i)
  } mvp_op_e;

  // Number of rows one MVP macro-instruction may sweep.
  localparam int unsigned MVP_COUNT_W = 16;

  // Which configurable array of the automata processor a write programs.
  typedef enum logic [2:0] {
    AP_CFG_STE    = 3'd0, // STE array of a partition: row = symbol
    AP_CFG_LOCAL  = 3'd1, // local switch of a partition: row = source state
    AP_CFG_GLOBAL = 3'd2, // global switch: row = exported state
    AP_CFG_ACCEPT = 3'd3, // Accept Vector c of a partition (whole vector)
    AP_CFG_START  = 3'd4  // start states of a partition (whole vector)
  } ap_cfg_target_e;

  // Width of the row address on the automata processor configuration port.
  localparam int unsigned AP_ROW_W = 16;

endpackage
