// Top level: the two memristive computation-in-memory accelerators.
//
// mvp     Memristive Vector Processor: bulk bit-wise Read/OR/AND/XOR on rows
//         of a memristive crossbar by scouting logic, driven by
//         macro-instructions from a host processor.
// rram_ap RRAM automata processor: runs a homogeneous NFA over a symbol
//         stream, one symbol per cycle, and reports acceptance.
// The two share only clock and reset; every other port of either block is
// brought out unchanged (prefix mvp_ or ap_). The host processor, its caches,
// DRAM and external memory sit outside and drive these ports. Placing both
// accelerators under one top is this design's own arrangement; they are
// independent accelerators.
module cim_top
  import cim_pkg::*;
#(
  parameter int unsigned MVP_ROWS = 2**23,
  parameter int unsigned MVP_COLS = 1024,
  parameter int unsigned AP_W     = 8,
  parameter int unsigned AP_N     = 1024,
  parameter int unsigned AP_PART  = 256,
  parameter int unsigned AP_GX    = 16,
  parameter int unsigned AP_GI    = 16,
  parameter int unsigned MVP_RW   = $clog2(MVP_ROWS),
  parameter int unsigned AP_PW    = (AP_N / AP_PART > 1) ? $clog2(AP_N / AP_PART) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // MVP
  input  logic                   mvp_instr_valid,
  output logic                   mvp_instr_ready,
  input  mvp_op_e                mvp_instr_op,
  input  logic [MVP_RW-1:0]      mvp_instr_row_a,
  input  logic [MVP_RW-1:0]      mvp_instr_row_b,
  input  logic [MVP_COUNT_W-1:0] mvp_instr_count,
  input  logic [MVP_COLS-1:0]    mvp_instr_data,
  output logic                   mvp_res_valid,
  input  logic                   mvp_res_ready,
  output logic [MVP_COLS-1:0]    mvp_res_data,
  output logic                   mvp_res_last,
  // RRAM-AP
  input  logic                   ap_cfg_we,
  input  ap_cfg_target_e         ap_cfg_target,
  input  logic [AP_PW-1:0]       ap_cfg_part,
  input  logic [AP_ROW_W-1:0]    ap_cfg_row,
  input  logic [AP_PART-1:0]     ap_cfg_data,
  input  logic                   ap_sym_valid,
  input  logic                   ap_sym_first,
  input  logic [AP_W-1:0]        ap_sym,
  output logic [AP_N-1:0]        ap_active,
  output logic                   ap_accept,
  output logic                   ap_result_valid
);
  mvp #(.ROWS(MVP_ROWS), .COLS(MVP_COLS), .RW(MVP_RW)) u_mvp (
    .clk, .rst_n,
    .instr_valid(mvp_instr_valid), .instr_ready(mvp_instr_ready),
    .instr_op(mvp_instr_op), .instr_row_a(mvp_instr_row_a),
    .instr_row_b(mvp_instr_row_b), .instr_count(mvp_instr_count),
    .instr_data(mvp_instr_data),
    .res_valid(mvp_res_valid), .res_ready(mvp_res_ready),
    .res_data(mvp_res_data), .res_last(mvp_res_last)
  );

  rram_ap #(.W(AP_W), .N(AP_N), .PART(AP_PART), .GX(AP_GX), .GI(AP_GI),
            .PW(AP_PW)) u_ap (
    .clk, .rst_n,
    .cfg_we(ap_cfg_we), .cfg_target(ap_cfg_target), .cfg_part(ap_cfg_part),
    .cfg_row(ap_cfg_row), .cfg_data(ap_cfg_data),
    .sym_valid(ap_sym_valid), .sym_first(ap_sym_first), .sym(ap_sym),
    .active(ap_active), .accept(ap_accept), .result_valid(ap_result_valid)
  );
endmodule
