// Full-size run of cim_top with every parameter at its default (a 1 GB
// MVP crossbar of 2^23 rows by 1024 bits; an automata processor of 1024
// states in four partitions of 256, 8-bit symbols). The MVP preloads a few
// rows at both ends of the address range and runs READ, OR, AND and XOR over
// them; meanwhile the automata processor is fully programmed with a random
// automaton and runs a symbol stream against a model. The configuration of
// every array is written first, since configuration bits have no reset.
module tb_cim_top_full;
  import cim_pkg::*;
  // Default sizes of cim_top.
  localparam int unsigned ROWS = 2**23, COLS = 1024, RW = $clog2(ROWS);
  localparam int unsigned W = 8, N = 1024, PART = 256, GX = 16, GI = 16;
  localparam int unsigned NPART = N / PART, SYMS = 2**W, LROWS = PART + GI;
  localparam int unsigned GROWS = NPART * GX, GCOLS = NPART * GI, PW = (NPART > 1) ? $clog2(NPART) : 1;
  logic clk = 0, rst_n = 0;
  // MVP side
  logic instr_valid, instr_ready, res_valid, res_ready, res_last;
  mvp_op_e instr_op;
  logic [RW-1:0] instr_row_a, instr_row_b;
  logic [MVP_COUNT_W-1:0] instr_count;
  logic [COLS-1:0] instr_data, res_data;
  logic [COLS-1:0] model [ROWS];
  // automata processor side
  logic cfg_we, sym_valid, sym_first, accept, result_valid;
  ap_cfg_target_e cfg_target;
  logic [PW-1:0] cfg_part;
  logic [AP_ROW_W-1:0] cfg_row;
  logic [PART-1:0] cfg_data;
  logic [W-1:0] sym;
  logic [N-1:0] active;
  logic [PART-1:0] m_ste [NPART][SYMS];
  logic [PART-1:0] m_loc [NPART][LROWS];
  logic [GCOLS-1:0] m_glob [GROWS];
  logic [PART-1:0] m_acc [NPART];
  logic [PART-1:0] m_start [NPART];
  logic [N-1:0] m_a;
  int checks = 0, failures = 0, cycles = 0;
  int n_ops [5];
  int n_stalls = 0;
  int n_accept = 0, n_reject = 0, n_cross = 0, n_first = 0;

  cim_top dut (
    .clk, .rst_n,
    .mvp_instr_valid(instr_valid), .mvp_instr_ready(instr_ready), .mvp_instr_op(instr_op),
    .mvp_instr_row_a(instr_row_a), .mvp_instr_row_b(instr_row_b),
    .mvp_instr_count(instr_count), .mvp_instr_data(instr_data),
    .mvp_res_valid(res_valid), .mvp_res_ready(res_ready), .mvp_res_data(res_data),
    .mvp_res_last(res_last),
    .ap_cfg_we(cfg_we), .ap_cfg_target(cfg_target), .ap_cfg_part(cfg_part),
    .ap_cfg_row(cfg_row), .ap_cfg_data(cfg_data), .ap_sym_valid(sym_valid),
    .ap_sym_first(sym_first), .ap_sym(sym), .ap_active(active), .ap_accept(accept),
    .ap_result_valid(result_valid)
  );

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 2000000) begin
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

  task automatic cfg(ap_cfg_target_e t, int p, int row, logic [PART-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_target = t; cfg_part = PW'(p); cfg_row = AP_ROW_W'(row); cfg_data = d;
    unique case (t)
      AP_CFG_STE:    m_ste[p][row] = d;
      AP_CFG_LOCAL:  m_loc[p][row] = d;
      AP_CFG_GLOBAL: m_glob[row] = GCOLS'(d);
      AP_CFG_ACCEPT: m_acc[p] = d;
      AP_CFG_START:  m_start[p] = d;
      default: ;
    endcase
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic logic [N-1:0] next_a(logic [N-1:0] a, int s, bit first, bit use_global);
    logic [GCOLS-1:0] gl;
    logic [N-1:0] r;
    gl = '0;
    for (int p = 0; p < NPART; p++)
      for (int k = 0; k < GX; k++)
        if (a[p*PART + k]) gl |= m_glob[p*GX + k];
    if (!use_global) gl = '0;
    for (int p = 0; p < NPART; p++) begin
      logic [PART-1:0] f;
      f = '0;
      for (int q = 0; q < PART; q++) if (a[p*PART + q]) f |= m_loc[p][q];
      for (int j = 0; j < GI; j++) if (gl[p*GI + j]) f |= m_loc[p][PART + j];
      if (first) f = m_start[p];
      r[p*PART +: PART] = f & m_ste[p][s];
    end
    return r;
  endfunction

  function automatic bit m_accept(logic [N-1:0] a);
    for (int p = 0; p < NPART; p++) if (|(a[p*PART +: PART] & m_acc[p])) return 1;
    return 0;
  endfunction

  // PART random bits, filled 32 at a time.
  function automatic logic [PART-1:0] rnd();
    logic [PART-1:0] v;
    for (int i = 0; i < PART; i += 32) v = (v << 32) | PART'($urandom);
    return v;
  endfunction

  // The last symbol belongs to no symbol class, so it empties the Active
  // Vector and the sequence is rejected.
  task automatic program_random();
    for (int p = 0; p < NPART; p++) begin
      for (int r = 0; r < SYMS; r++) cfg(AP_CFG_STE, p, r, (r == SYMS - 1) ? '0 : (rnd() | rnd()));
      for (int r = 0; r < LROWS; r++) cfg(AP_CFG_LOCAL, p, r, rnd() & rnd() & rnd());
      cfg(AP_CFG_ACCEPT, p, 0, rnd() & rnd());
      cfg(AP_CFG_START, p, 0, rnd() & rnd());
    end
    for (int r = 0; r < GROWS; r++) cfg(AP_CFG_GLOBAL, 0, r, rnd() & rnd());
  endtask

  initial begin
    instr_valid = 0; res_ready = 0; instr_op = MVP_READ;
    instr_row_a = '0; instr_row_b = '0; instr_count = '0; instr_data = '0;
    cfg_we = 0; sym_valid = 0; sym_first = 0; sym = '0; cfg_part = '0;
    cfg_target = AP_CFG_STE; cfg_row = '0; cfg_data = '0; m_a = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin : mvp_flow
        for (int r = 0; r < 8; r++) issue(MVP_WRITE, (r < 4) ? r : ROWS - 8 + r, 0, 1, COLS'({$urandom, $urandom}), 0);
        for (int k = 0; k < 6; k++) begin
          mvp_op_e op;
          int a; int b; a = (k % 2) ? 0 : ROWS - 4; b = (k % 3) ? ROWS - 4 : 0;
          op = mvp_op_e'(1 + (k % 4));
          issue(op, a, b, 4, '0, k % 3 == 1);
        end
      end
      begin : ap_flow
        for (int trial = 0; trial < 1; trial++) begin
          int t0;
          program_random();
          @(negedge clk);
          t0 = cycles;
          for (int k = 0; k < 300; k++) begin
            int s;
            bit first;
            logic [N-1:0] no_glob;
            s = (k % 40 == 39) ? SYMS - 1 : $urandom_range(SYMS-1);
            first = (k % 25 == 0);
            sym_valid = 1; sym = W'(s); sym_first = first;
            no_glob = next_a(m_a, s, first, 0);
            m_a = next_a(m_a, s, first, 1);
            if (first) n_first++;
            if (m_a != no_glob) n_cross++;
            @(negedge clk);
            checks++;
            if (active !== m_a) begin failures++; $display("trial %0d symbol %0d: active mismatch", trial, k); end
            checks++;
            if (accept !== m_accept(m_a) || result_valid !== 1'b1) begin
              failures++; $display("trial %0d symbol %0d: accept %b expected %b", trial, k, accept, m_accept(m_a));
            end
            if (m_accept(m_a)) n_accept++; else n_reject++;
          end
          sym_valid = 0;
          checks++;
          if (cycles - t0 != 300) begin failures++; $display("300 symbols took %0d cycles", cycles - t0); end
        end
      end
    join
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (n_ops[o] == 0) begin failures++; $display("MVP operation %0d never ran", o); end
    end
    checks++;
    if (n_stalls == 0 || n_accept == 0 || n_reject == 0 || n_cross == 0 || n_first == 0) begin
      failures++;
      $display("mechanism missing");
    end
    $display("MVP ops write %0d read %0d or %0d and %0d xor %0d, result stalls %0d",
             n_ops[0], n_ops[1], n_ops[2], n_ops[3], n_ops[4], n_stalls);
    $display("AP accepts %0d rejects %0d cross-partition %0d restarts %0d",
             n_accept, n_reject, n_cross, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
