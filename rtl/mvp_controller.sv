// Instruction controller of the Memristive Vector Processor.
//
// The host processor hands the MVP one macro-instruction at a time
// (instr_valid/instr_ready handshake); the controller decodes it and runs it
// on the crossbar, and returns the results over a valid/ready result port.
//   MVP_WRITE  row_a <- data                            (no result)
//   MVP_READ   for i < count: result = row (row_a+i)
//   MVP_OR/AND/XOR for i < count: result = row (row_a+i) op row (row_b+i)
// A count of 0 is executed as 1. A logic operation activates both rows at
// once and selects the matching sense-amplifier reference, so no operand is
// ever moved out of the array before it is combined. When both operands are
// the same row there is only one word line to raise: the row is read alone
// (OR and AND of a row with itself give the row) and XOR returns zeros. Results are returned in
// order; res_last marks the last result of an instruction.
//
// Timing: the instruction is taken in the cycle instr_valid and instr_ready
// are both high. A write completes one cycle later. A read or logic
// instruction needs two cycles per row (activate, sense) plus any cycles the
// host holds res_ready low; the next instruction is accepted once the last
// result has been taken. This sequencing, the instruction set and the field
// widths are this design's own; the paper only says that the MVP decodes and
// executes a macro-instruction locally and returns the result.
module mvp_controller
  import cim_pkg::*;
#(
  parameter int unsigned ROWS = 2**23,
  parameter int unsigned COLS = 1024,
  parameter int unsigned RW   = $clog2(ROWS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // macro-instruction from the host
  input  logic                   instr_valid,
  output logic                   instr_ready,
  input  mvp_op_e                instr_op,
  input  logic [RW-1:0]          instr_row_a,
  input  logic [RW-1:0]          instr_row_b,
  input  logic [MVP_COUNT_W-1:0] instr_count,
  input  logic [COLS-1:0]        instr_data,
  // results to the host
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic [COLS-1:0]        res_data,
  output logic                   res_last,
  // crossbar and sense amplifiers
  output logic                   xb_we,
  output logic [RW-1:0]          xb_waddr,
  output logic [COLS-1:0]        xb_wdata,
  output logic                   xb_act_en,
  output logic [RW-1:0]          xb_row_a,
  output logic                   xb_row_b_en,
  output logic [RW-1:0]          xb_row_b,
  output sa_ref_e                sa_ref,
  input  logic [COLS-1:0]        sa_out
);
  typedef enum logic [1:0] {S_IDLE, S_EXEC, S_RESP} state_e;

  state_e                 state;
  mvp_op_e                op_q;
  logic [RW-1:0]          row_a_q, row_b_q;
  logic [MVP_COUNT_W-1:0] left_q;
  logic [COLS-1:0]        data_q;
  logic                   same_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= MVP_READ;
      row_a_q <= '0;
      row_b_q <= '0;
      left_q  <= '0;
      data_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (instr_valid) begin
          op_q    <= instr_op;
          row_a_q <= instr_row_a;
          row_b_q <= instr_row_b;
          left_q  <= (instr_count == '0) ? MVP_COUNT_W'(1) : instr_count;
          data_q  <= instr_data;
          state   <= S_EXEC;
        end
        S_EXEC: state <= (op_q == MVP_WRITE) ? S_IDLE : S_RESP;
        S_RESP: if (res_ready) begin
          row_a_q <= row_a_q + RW'(1);
          row_b_q <= row_b_q + RW'(1);
          left_q  <= left_q - MVP_COUNT_W'(1);
          state   <= (left_q == MVP_COUNT_W'(1)) ? S_IDLE : S_EXEC;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign instr_ready = (state == S_IDLE);

  assign xb_we       = (state == S_EXEC) && (op_q == MVP_WRITE);
  assign xb_waddr    = row_a_q;
  assign xb_wdata    = data_q;
  assign xb_act_en   = (state == S_EXEC) && (op_q != MVP_WRITE);
  assign xb_row_a    = row_a_q;
  assign same_row    = (row_a_q == row_b_q);
  assign xb_row_b_en = (op_q != MVP_READ) && !same_row;
  assign xb_row_b    = row_b_q;

  always_comb begin
    unique case (op_q)
      MVP_OR:  sa_ref = same_row ? SA_READ : SA_OR;
      MVP_AND: sa_ref = same_row ? SA_READ : SA_AND;
      MVP_XOR: sa_ref = SA_XOR;
      default: sa_ref = SA_READ;
    endcase
  end

  assign res_valid = (state == S_RESP);
  assign res_data  = (op_q == MVP_XOR && same_row) ? '0 : sa_out;
  assign res_last  = (state == S_RESP) && (left_q == MVP_COUNT_W'(1));

  // A result offered to the host stays put until it is taken.
  a_res_stable: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res_data));
endmodule
