// Memristive Vector Processor (MVP).
//
// An accelerator beside a conventional processor: the data set is preloaded
// into a memristive crossbar, and the memory-intensive loops of a program are
// replaced by macro-instructions that the MVP executes inside the memory. Bulk
// bit-wise logic is done by scouting logic: two rows are activated together
// and the sense amplifiers, given a suitable reference, output their OR, AND
// or XOR directly, so operands never leave the array.
//
// Blocks: mvp_controller (instruction decode and sequencing), mvp_crossbar
// (the array, one or two rows activated at a time) and scouting_sa (sense
// amplifiers with selectable reference). Ports and timing are those of
// mvp_controller: two cycles per result row, one result per row, a write
// takes two cycles. The instruction set and its timing are this design's own.
module mvp
  import cim_pkg::*;
#(
  parameter int unsigned ROWS = 2**23,
  parameter int unsigned COLS = 1024,
  parameter int unsigned RW   = $clog2(ROWS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   instr_valid,
  output logic                   instr_ready,
  input  mvp_op_e                instr_op,
  input  logic [RW-1:0]          instr_row_a,
  input  logic [RW-1:0]          instr_row_b,
  input  logic [MVP_COUNT_W-1:0] instr_count,
  input  logic [COLS-1:0]        instr_data,
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic [COLS-1:0]        res_data,
  output logic                   res_last
);
  logic                 xb_we, xb_act_en, xb_row_b_en, level_valid;
  logic [RW-1:0]        xb_waddr, xb_row_a, xb_row_b;
  logic [COLS-1:0]      xb_wdata, sa_out;
  logic [COLS-1:0][1:0] level;
  sa_ref_e              sa_ref;

  mvp_controller #(.ROWS(ROWS), .COLS(COLS), .RW(RW)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr_op, .instr_row_a, .instr_row_b,
    .instr_count, .instr_data,
    .res_valid, .res_ready, .res_data, .res_last,
    .xb_we, .xb_waddr, .xb_wdata, .xb_act_en, .xb_row_a, .xb_row_b_en,
    .xb_row_b, .sa_ref, .sa_out
  );

  mvp_crossbar #(.ROWS(ROWS), .COLS(COLS), .RW(RW)) u_xbar (
    .clk, .rst_n,
    .we(xb_we), .waddr(xb_waddr), .wdata(xb_wdata),
    .act_en(xb_act_en), .row_a(xb_row_a), .row_b_en(xb_row_b_en),
    .row_b(xb_row_b), .level, .level_valid
  );

  scouting_sa #(.COLS(COLS)) u_sa (.level, .sa_ref, .out(sa_out));

  // The controller only senses rows that have been activated.
  a_sense_after_act: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> level_valid);
endmodule
