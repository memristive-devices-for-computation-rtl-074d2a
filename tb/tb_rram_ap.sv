// Self-checking test of rram_ap at a reduced size (32 states in four
// partitions of eight, two exported states and two global lines per
// partition, 3-bit symbols). Random automata are programmed through the
// configuration port and run on random symbol streams; after every symbol
// the Active Vector and the accept output are compared with a model of the
// symbol vector, the two-level routing (global switch then local switch),
// the AND and the accept check. Checks one symbol per cycle, and that
// transitions across partitions, acceptance, rejection and restarts all
// occur.
module tb_rram_ap;
  import cim_pkg::*;
  localparam int unsigned W = 3, N = 32, PART = 8, GX = 2, GI = 2;
  localparam int unsigned NPART = N / PART, SYMS = 2**W, LROWS = PART + GI;
  localparam int unsigned GROWS = NPART * GX, GCOLS = NPART * GI, PW = $clog2(NPART);
  logic clk = 0, rst_n = 0;
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
  int n_accept = 0, n_reject = 0, n_cross = 0, n_first = 0;

  rram_ap #(.W(W), .N(N), .PART(PART), .GX(GX), .GI(GI)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 400000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

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

  task automatic program_random();
    for (int p = 0; p < NPART; p++) begin
      for (int r = 0; r < SYMS; r++) cfg(AP_CFG_STE, p, r, PART'($urandom) | PART'($urandom));
      for (int r = 0; r < LROWS; r++) cfg(AP_CFG_LOCAL, p, r, PART'($urandom) & PART'($urandom) & PART'($urandom));
      cfg(AP_CFG_ACCEPT, p, 0, PART'($urandom) & PART'($urandom));
      cfg(AP_CFG_START, p, 0, PART'($urandom) & PART'($urandom));
    end
    for (int r = 0; r < GROWS; r++) cfg(AP_CFG_GLOBAL, 0, r, PART'($urandom) & PART'($urandom));
  endtask

  initial begin
    int t0;
    cfg_we = 0; sym_valid = 0; sym_first = 0; sym = '0; cfg_part = '0;
    cfg_target = AP_CFG_STE; cfg_row = '0; cfg_data = '0; m_a = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (active !== '0 || result_valid !== 1'b0) begin failures++; $display("reset state wrong"); end
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      program_random();
      // Stream symbols back to back: one per cycle, results one cycle later.
      @(negedge clk);
      t0 = cycles;
      for (int k = 0; k < 200; k++) begin
        int s;
        bit first;
        logic [N-1:0] no_glob;
        s = $urandom_range(SYMS-1);
        first = (k % 25 == 0);
        sym_valid = 1; sym = W'(s); sym_first = first;
        no_glob = next_a(m_a, s, first, 0);
        m_a = next_a(m_a, s, first, 1);
        if (first) n_first++;
        if (m_a != no_glob) n_cross++;
        @(negedge clk);
        checks++;
        if (active !== m_a) begin failures++; $display("trial %0d symbol %0d: active %h expected %h", trial, k, active, m_a); end
        checks++;
        if (accept !== m_accept(m_a) || result_valid !== 1'b1) begin
          failures++; $display("trial %0d symbol %0d: accept %b expected %b", trial, k, accept, m_accept(m_a));
        end
        if (m_accept(m_a)) n_accept++; else n_reject++;
      end
      sym_valid = 0;
      checks++;
      if (cycles - t0 != 200) begin failures++; $display("200 symbols took %0d cycles", cycles - t0); end
    end
    checks++;
    if (n_accept == 0 || n_reject == 0 || n_cross == 0 || n_first == 0) begin
      failures++;
      $display("mechanism missing: accept %0d reject %0d cross-partition %0d restart %0d", n_accept, n_reject, n_cross, n_first);
    end
    $display("accepts %0d rejects %0d cross-partition %0d restarts %0d", n_accept, n_reject, n_cross, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
