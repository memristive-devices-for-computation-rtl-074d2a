// RRAM automata processor (RRAM-AP).
//
// Runs a homogeneous non-deterministic finite automaton of up to N states on
// a stream of W-bit symbols, one symbol per clock cycle. The N states are
// split into NPART = N/PART partitions (ap_partition). The routing matrix is
// built in two levels: each partition's local switch routes among its own
// PART states, and one global switch, again a dot_product_array, connects the
// first GX states of every partition (its exported states) to GI input lines
// of every partition's local switch. A transition between partitions thus
// runs from an exported state through the global switch to a global line and
// then through the target's local switch. Both levels are evaluated in the
// same cycle as the symbol.
//
// Interface:
//   cfg_*      program one row of one array per cycle (see ap_partition);
//              cfg_part selects the partition, ignored for AP_CFG_GLOBAL whose
//              rows are exported states (partition p, state k -> p*GX+k) and
//              whose columns are global lines (partition p, line j -> p*GI+j).
//   sym_valid  presents sym; sym_first marks the first symbol of a sequence.
//   active     Active Vector a after the last symbol (state n = bit n).
//   accept     A = OR(a AND c), valid while result_valid is high, i.e. in
//              the cycles after a symbol has been consumed.
// Latency: the result of a symbol appears one cycle after it is presented;
// throughput one symbol per cycle, with no stall.
//
// The model (STE array, routing matrix, AND, Accept Vector) and the use of a
// two-level global/local switch structure follow the paper; N, PART, GX, GI
// and the way states are exported are this design's own choices, as the
// paper takes the routing structure from the SRAM-based design it compares
// with and gives no sizes for it.
module rram_ap
  import cim_pkg::*;
#(
  parameter int unsigned W    = 8,
  parameter int unsigned N    = 1024,
  parameter int unsigned PART = 256,
  parameter int unsigned GX   = 16,
  parameter int unsigned GI   = 16,
  parameter int unsigned NPART = N / PART,
  parameter int unsigned PW    = (NPART > 1) ? $clog2(NPART) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  ap_cfg_target_e      cfg_target,
  input  logic [PW-1:0]       cfg_part,
  input  logic [AP_ROW_W-1:0] cfg_row,
  input  logic [PART-1:0]     cfg_data,
  input  logic                sym_valid,
  input  logic                sym_first,
  input  logic [W-1:0]        sym,
  output logic [N-1:0]        active,
  output logic                accept,
  output logic                result_valid
);
  localparam int unsigned GROWS = NPART * GX;
  localparam int unsigned GCOLS = NPART * GI;

  logic [GROWS-1:0] exported;
  logic [GCOLS-1:0] global_lines;
  logic [NPART-1:0] match;

  dot_product_array #(.ROWS(GROWS), .COLS(GCOLS)) u_global (
    .clk     (clk),
    .cfg_we  (cfg_we && cfg_target == AP_CFG_GLOBAL),
    .cfg_row (cfg_row[$clog2(GROWS)-1:0]),
    .cfg_data(cfg_data[GCOLS-1:0]),
    .in_vec  (exported),
    .out_vec (global_lines)
  );

  for (genvar p = 0; p < NPART; p++) begin : g_part
    logic [PART-1:0] a_p;
    ap_partition #(.W(W), .PART(PART), .GI(GI)) u_part (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_we    (cfg_we && cfg_target != AP_CFG_GLOBAL && 32'(cfg_part) == p),
      .cfg_target(cfg_target),
      .cfg_row   (cfg_row),
      .cfg_data  (cfg_data),
      .sym_valid (sym_valid),
      .sym_first (sym_first),
      .sym       (sym),
      .gl_in     (global_lines[p*GI +: GI]),
      .a_out     (a_p),
      .match     (match[p])
    );
    assign active[p*PART +: PART] = a_p;
    assign exported[p*GX +: GX]   = a_p[GX-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) result_valid <= 1'b0;
    else        result_valid <= sym_valid | (result_valid & ~cfg_we);
  end

  assign accept = |match;

  initial begin
    assert (N % PART == 0) else $error("N must be a multiple of PART");
    assert (GCOLS <= PART) else $error("NPART*GI must fit the configuration data");
    assert (GX <= PART) else $error("GX must not exceed PART");
  end
endmodule
