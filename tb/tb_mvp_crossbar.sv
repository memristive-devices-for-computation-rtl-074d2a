// Self-checking test of mvp_crossbar: random rows are written, then single
// and double row activations are compared per bit line with the number of
// stored ones; activating one row twice must count it once. Checks that the
// level is valid one cycle after the activation.
module tb_mvp_crossbar;
  localparam int unsigned ROWS = 64, COLS = 24, RW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  logic we, act_en, row_b_en, level_valid;
  logic [RW-1:0] waddr, row_a, row_b;
  logic [COLS-1:0] wdata;
  logic [COLS-1:0][1:0] level;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0, cycles = 0;

  mvp_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 20000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    int ra, rb, exp_l;
    logic ben;
    we = 0; act_en = 0; row_b_en = 0; waddr = '0; row_a = '0; row_b = '0; wdata = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (level_valid !== 1'b0) begin failures++; $display("level_valid set after reset"); end
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = RW'(r); wdata = COLS'({$urandom, $urandom});
      model[r] = wdata;
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < 400; k++) begin
      ra = $urandom_range(ROWS-1);
      rb = (k % 10 == 0) ? ra : $urandom_range(ROWS-1);
      ben = (k % 4 != 0);
      act_en = 1; row_a = RW'(ra); row_b = RW'(rb); row_b_en = ben;
      @(negedge clk);
      act_en = 0;
      checks++;
      if (level_valid !== 1'b1) begin failures++; $display("level not valid one cycle after activation"); end
      for (int c = 0; c < COLS; c++) begin
        exp_l = model[ra][c] + ((ben && rb != ra) ? model[rb][c] : 0);
        checks++;
        if (level[c] !== 2'(exp_l)) begin
          failures++;
          $display("rows %0d/%0d col %0d: level %0d expected %0d", ra, rb, c, level[c], exp_l);
        end
      end
      // Overwrite a row now and then so reads see fresh data.
      if (k % 7 == 0) begin
        we = 1; waddr = RW'(ra); wdata = COLS'({$urandom, $urandom}); model[ra] = wdata;
        @(negedge clk) we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
