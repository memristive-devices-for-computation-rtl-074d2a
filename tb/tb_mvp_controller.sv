// Self-checking test of mvp_controller. The crossbar and sense amplifiers
// are replaced by a test-bench model (an array read one cycle after the
// activation, combined as the selected reference dictates). Preloads a
// data set with WRITE instructions, then runs READ, OR, AND and XOR
// macro-instructions over runs of rows and compares each returned row with
// the same operation done on the test bench's own copy of the data. The host
// sometimes holds res_ready low. With res_ready held high, an instruction of
// COUNT rows must deliver its last result 2*COUNT cycles after it was taken.
module tb_mvp_controller;
  import cim_pkg::*;
  localparam int unsigned ROWS = 256, COLS = 48, RW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, res_valid, res_ready, res_last;
  mvp_op_e instr_op;
  logic [RW-1:0] instr_row_a, instr_row_b;
  logic [MVP_COUNT_W-1:0] instr_count;
  logic [COLS-1:0] instr_data, res_data;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0, cycles = 0;
  int n_ops [5];
  int n_stalls = 0;

  logic xb_we, xb_act_en, xb_row_b_en;
  logic [RW-1:0] xb_waddr, xb_row_a, xb_row_b;
  logic [COLS-1:0] xb_wdata, sa_out, mem_a, mem_b;
  logic [COLS-1:0] mem [ROWS];
  sa_ref_e sa_ref;

  mvp_controller #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  // Test-bench model of crossbar plus sense amplifiers.
  always @(posedge clk) begin
    if (xb_we) mem[xb_waddr] <= xb_wdata;
    if (xb_act_en) begin
      mem_a <= mem[xb_row_a];
      mem_b <= xb_row_b_en ? mem[xb_row_b] : '0;
    end
  end
  always_comb
    unique case (sa_ref)
      SA_AND:  sa_out = mem_a & mem_b;
      SA_XOR:  sa_out = mem_a ^ mem_b;
      default: sa_out = mem_a | mem_b;
    endcase

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic logic [COLS-1:0] ref_op(mvp_op_e op, int a, int b);
    unique case (op)
      MVP_OR:  return model[a] | model[b];
      MVP_AND: return model[a] & model[b];
      MVP_XOR: return model[a] ^ model[b];
      default: return model[a];
    endcase
  endfunction

  task automatic issue(mvp_op_e op, int a, int b, int cnt, logic [COLS-1:0] data, bit stall);
    int t0, n, got;
    @(negedge clk);
    instr_valid = 1; instr_op = op; instr_row_a = RW'(a); instr_row_b = RW'(b);
    instr_count = MVP_COUNT_W'(cnt); instr_data = data;
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
    t0 = cycles;
    @(negedge clk);
    instr_valid = 0;
    n_ops[op]++;
    if (op == MVP_WRITE) begin
      model[a] = data;
      @(negedge clk);
      return;
    end
    n = (cnt == 0) ? 1 : cnt;
    got = 0;
    while (got < n) begin
      res_ready = stall ? ($urandom_range(2) != 0) : 1'b1;
      if (res_valid && !res_ready) n_stalls++;
      @(posedge clk);
      if (res_valid && res_ready) begin
        logic [COLS-1:0] e;
        e = ref_op(op, (a + got) % ROWS, (b + got) % ROWS);
        checks++;
        if (res_data !== e) begin
          failures++;
          $display("op %s row %0d: got %h expected %h", op.name(), got, res_data, e);
        end
        checks++;
        if (res_last !== (got == n - 1)) begin failures++; $display("res_last wrong at %0d", got); end
        got++;
        if (got == n && !stall) begin
          checks++;
          if (cycles - t0 != 2 * n) begin
            failures++;
            $display("%0d rows took %0d cycles, expected %0d", n, cycles - t0, 2 * n);
          end
        end
      end
      @(negedge clk);
    end
    res_ready = 0;
  endtask

  initial begin
    instr_valid = 0; res_ready = 0; instr_op = MVP_READ;
    instr_row_a = '0; instr_row_b = '0; instr_count = '0; instr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) issue(MVP_WRITE, r, 0, 1, COLS'({$urandom, $urandom}), 0);
    for (int k = 0; k < 60; k++) begin
      mvp_op_e op;
      op = mvp_op_e'(1 + (k % 4));
      begin
        int a;
        a = $urandom_range(ROWS-1);
        // Every eighth instruction uses one row for both operands.
        issue(op, a, (k % 8 == 7) ? a : $urandom_range(ROWS-1), $urandom_range(0, 9), '0, k % 3 == 1);
      end
      if (k % 5 == 0) issue(MVP_WRITE, $urandom_range(ROWS-1), 0, 1, COLS'({$urandom, $urandom}), 0);
    end
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (n_ops[o] == 0) begin failures++; $display("operation %0d never ran", o); end
    end
    checks++;
    if (n_stalls == 0) begin failures++; $display("no result stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
