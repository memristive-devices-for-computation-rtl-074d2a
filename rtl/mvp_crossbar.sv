// Memristive crossbar memory of the Memristive Vector Processor.
//
// ROWS word lines by COLS bit lines of memristive cells; a stored 1 is the low
// resistance RL, a 0 the high resistance RH. Besides an ordinary row write,
// the array can activate one row (row_a) or two rows (row_a and row_b) at the
// same time. With two rows active, the current into the sense amplifier of a
// bit line is set by the two cells in parallel: 2Vr/RH, about Vr/RL, or 2Vr/RL.
// This model gives that current as a level per bit line, the number of
// low-resistance cells among the active rows (0, 1 or 2), which the
// scouting-logic sense amplifiers then compare with their references.
// Activating the same row twice counts it once, as it is one word line.
//
// Timing: a write (we) stores wdata at the clock edge. An activation (act_en)
// is sampled at the edge; level is valid from the next cycle (level_valid)
// and holds until the next activation. A write and an activation of the same
// row in one cycle see the old contents.
//
// The paper's crossbar is 2 GB. One array of that size exceeds the largest
// single object the SystemVerilog front ends accept (2^31 bytes), so the
// default is 2^23 rows of 1024 bits, 1 GB, the largest power of two they take.
// The row/column split is this design's choice. Synthesis of the full array
// is slow and needs about 12 GB of host memory; smaller ROWS synthesize fast.
module mvp_crossbar #(
  parameter int unsigned ROWS = 2**23,
  parameter int unsigned COLS = 1024,
  parameter int unsigned RW   = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // row write (dataset preload)
  input  logic                 we,
  input  logic [RW-1:0]        waddr,
  input  logic [COLS-1:0]      wdata,
  // scouting read: activate one or two rows
  input  logic                 act_en,
  input  logic [RW-1:0]        row_a,
  input  logic                 row_b_en,
  input  logic [RW-1:0]        row_b,
  output logic [COLS-1:0][1:0] level,
  output logic                 level_valid
);
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] cells_a, cells_b;

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_ff @(posedge clk) begin
    if (act_en) begin
      cells_a <= mem[row_a];
      cells_b <= (row_b_en && row_b != row_a) ? mem[row_b] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      level_valid <= 1'b0;
    else if (act_en) level_valid <= 1'b1;
  end

  always_comb
    for (int unsigned c = 0; c < COLS; c++)
      level[c] = {1'b0, cells_a[c]} + {1'b0, cells_b[c]};
endmodule
