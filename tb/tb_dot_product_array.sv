// Self-checking test of dot_product_array: programs random configuration
// bits row by row, then applies one-hot, empty, full and random input
// vectors and compares every column with an OR-of-AND model.
module tb_dot_product_array;
  localparam int unsigned ROWS = 24, COLS = 20;
  logic clk = 0;
  logic cfg_we;
  logic [$clog2(ROWS)-1:0] cfg_row;
  logic [COLS-1:0] cfg_data, out_vec, expect_v;
  logic [ROWS-1:0] in_vec;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0, cycles = 0;

  dot_product_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .cfg_we, .cfg_row, .cfg_data, .in_vec, .out_vec);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 5000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check(input logic [ROWS-1:0] v);
    in_vec = v;
    #1;
    expect_v = '0;
    for (int r = 0; r < ROWS; r++) if (v[r]) expect_v |= model[r];
    checks++;
    if (out_vec !== expect_v) begin
      failures++;
      $display("in %h: got %h expected %h", v, out_vec, expect_v);
    end
  endtask

  initial begin
    cfg_we = 0; in_vec = '0; cfg_row = '0; cfg_data = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        cfg_we = 1; cfg_row = r[$clog2(ROWS)-1:0];
        cfg_data = COLS'({$urandom, $urandom});
        if (pass == 2 && r % 3 == 0) cfg_data = '0;
        model[r] = cfg_data;
      end
      @(negedge clk) cfg_we = 0;
      check('0);
      check('1);
      for (int r = 0; r < ROWS; r++) check(ROWS'(1) << r);
      for (int k = 0; k < 200; k++) check(ROWS'({$urandom, $urandom}) & ROWS'({$urandom, $urandom}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
