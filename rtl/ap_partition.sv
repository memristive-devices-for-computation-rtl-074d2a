// One partition of the RRAM automata processor.
//
// A partition holds PART states (STEs) and carries out, for every input
// symbol, the three steps of the generic automata-processor model:
//   1. input symbol processing: the symbol decoder raises one of 2^W word
//      lines of the STE array (a dot_product_array of 2^W x PART); column n
//      yields s[n], whether the symbol is in the symbol class of state n;
//   2. active state processing: the local switch (a dot_product_array of
//      (PART+GI) x PART) routes the Active Vector a of this partition, plus GI
//      lines arriving from the global switch, to the Follow Vector f; the new
//      Active Vector is f AND s (bit-wise), stored in a register;
//   3. output identification: match = OR over n of (a[n] AND c[n]), with the
//      Accept Vector c.
// The first symbol of a sequence (first = 1) is evaluated against the start
// vector instead of the routed Follow Vector: the start states are those the
// implicit start state q0 leads to, so a sequence is matched from its first
// symbol on and earlier activity is dropped.
//
// Timing: one symbol per clock. With sym_valid high at an edge, a takes the
// new value at that edge; match and a_out follow a combinationally, so the
// result of a symbol is visible in the cycle after it is presented. gl_in must
// be derived from the current a of all partitions (it is in rram_ap).
//
// Configuration: cfg_we with cfg_target selects the STE array (row = symbol),
// the local switch (rows 0..PART-1 = local source state, PART..PART+GI-1 =
// global input line), or the Accept or start vector (written whole from
// cfg_data). Configuration bits are non-volatile and not reset; a is reset.
//
// The STE array, the routing by dot products, the AND and the accept check
// follow the paper; the partition size, the global input lines, the start
// vector and the timing are this design's own choices.
module ap_partition
  import cim_pkg::*;
#(
  parameter int unsigned W    = 8,
  parameter int unsigned PART = 256,
  parameter int unsigned GI   = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_we,
  input  ap_cfg_target_e       cfg_target,
  input  logic [AP_ROW_W-1:0]  cfg_row,
  input  logic [PART-1:0]      cfg_data,
  // symbol stream
  input  logic                 sym_valid,
  input  logic                 sym_first,
  input  logic [W-1:0]         sym,
  // lines from the global switch
  input  logic [GI-1:0]        gl_in,
  // state
  output logic [PART-1:0]      a_out,
  output logic                 match
);
  localparam int unsigned SYMS  = 2**W;
  localparam int unsigned LROWS = PART + GI;

  logic [SYMS-1:0]  wl;
  logic [PART-1:0]  s_vec, f_route, f_vec, a_q;
  logic [PART-1:0]  accept_c, start_v;

  symbol_decoder #(.W(W)) u_dec (.en(sym_valid), .sym(sym), .wl(wl));

  dot_product_array #(.ROWS(SYMS), .COLS(PART)) u_ste (
    .clk     (clk),
    .cfg_we  (cfg_we && cfg_target == AP_CFG_STE),
    .cfg_row (cfg_row[$clog2(SYMS)-1:0]),
    .cfg_data(cfg_data),
    .in_vec  (wl),
    .out_vec (s_vec)
  );

  dot_product_array #(.ROWS(LROWS), .COLS(PART)) u_local (
    .clk     (clk),
    .cfg_we  (cfg_we && cfg_target == AP_CFG_LOCAL),
    .cfg_row (cfg_row[$clog2(LROWS)-1:0]),
    .cfg_data(cfg_data),
    .in_vec  ({gl_in, a_q}),
    .out_vec (f_route)
  );

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_target == AP_CFG_ACCEPT) accept_c <= cfg_data;
    if (cfg_we && cfg_target == AP_CFG_START)  start_v  <= cfg_data;
  end

  assign f_vec = sym_first ? start_v : f_route;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         a_q <= '0;
    else if (sym_valid) a_q <= f_vec & s_vec;
  end

  assign a_out = a_q;
  assign match = |(a_q & accept_c);
endmodule
