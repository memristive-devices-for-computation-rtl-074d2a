// Array of Boolean vector dot-product operators (configurable crossbar).
//
// Each of the COLS columns holds ROWS configuration bits and outputs
//   out[c] = OR over r of (in[r] AND cfg[r][c]),
// the dot product of the input vector with the column, with AND as product and
// OR as sum. In the memristive array a bit is a 1T1R cell (logic 1 = low
// resistance); the bit line is pre-charged, the active word lines discharge it
// through any low-resistance cell, and an inverting sense amplifier reads 1.
// Here that read-out is the combinational OR above. The same array serves as
// STE array (one-hot input from the symbol decoder) and as local or global
// switch (many inputs active at once), as in the paper.
//
// Programming: while cfg_we is high, word line cfg_row is selected and the bit
// lines carry cfg_data; a 1 stands for a SET pulse (low resistance), a 0 for a
// RESET pulse (high resistance). One row is written per clock edge. The
// configuration is non-volatile and therefore has no reset. Read-out is
// combinational: out follows in within the same cycle.
module dot_product_array #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256,
  parameter int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            cfg_we,
  input  logic [RW-1:0]   cfg_row,
  input  logic [COLS-1:0] cfg_data,
  input  logic [ROWS-1:0] in_vec,
  output logic [COLS-1:0] out_vec
);
  logic [COLS-1:0] cfg_bit [ROWS];

  always_ff @(posedge clk)
    if (cfg_we) cfg_bit[cfg_row] <= cfg_data;

  always_comb begin
    out_vec = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (in_vec[r]) out_vec = out_vec | cfg_bit[r];
  end

  // A row address past the array would program nothing.
  a_row_in_range: assert property (@(posedge clk) cfg_we |-> (32'(cfg_row) < ROWS));
endmodule
