// Self-checking test of ap_partition. First the paper-style example: four
// symbols a..d, three states, S1 with symbol class {a,b,c} reached from the
// start, S2 class {c} reached from S1, S3 class {b} reached from S1 and S2
// and accepting; sequences are checked for their Active Vector and
// acceptance. Then the partition is programmed at random and driven with
// random symbols and global input lines, against a model of the three steps
// (symbol vector, follow vector, AND, accept). One result per cycle.
module tb_ap_partition;
  import cim_pkg::*;
  localparam int unsigned W = 2, PART = 3, GI = 2;
  localparam int unsigned SYMS = 2**W, LROWS = PART + GI;
  logic clk = 0, rst_n = 0;
  logic cfg_we, sym_valid, sym_first, match;
  ap_cfg_target_e cfg_target;
  logic [AP_ROW_W-1:0] cfg_row;
  logic [PART-1:0] cfg_data, a_out;
  logic [W-1:0] sym;
  logic [GI-1:0] gl_in;
  logic [PART-1:0] m_ste [SYMS];
  logic [PART-1:0] m_loc [LROWS];
  logic [PART-1:0] m_acc, m_start, m_a;
  int checks = 0, failures = 0, cycles = 0;
  int n_accept = 0, n_reject = 0, n_global = 0;

  ap_partition #(.W(W), .PART(PART), .GI(GI)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 50000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic cfg(ap_cfg_target_e t, int row, logic [PART-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_target = t; cfg_row = AP_ROW_W'(row); cfg_data = d;
    unique case (t)
      AP_CFG_STE:    m_ste[row] = d;
      AP_CFG_LOCAL:  m_loc[row] = d;
      AP_CFG_ACCEPT: m_acc = d;
      AP_CFG_START:  m_start = d;
      default: ;
    endcase
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Feed one symbol and compare with the model one cycle later.
  task automatic step(int s, bit first, logic [GI-1:0] g);
    logic [PART-1:0] f, f_loc;
    logic [LROWS-1:0] in_v;
    @(negedge clk);
    sym_valid = 1; sym = W'(s); sym_first = first; gl_in = g;
    in_v = {g, m_a};
    f = '0; f_loc = '0;
    for (int r = 0; r < LROWS; r++) if (in_v[r]) f |= m_loc[r];
    for (int r = 0; r < PART; r++) if (m_a[r]) f_loc |= m_loc[r];
    if (first) f = m_start;
    if (!first && ((f & m_ste[s]) != (f_loc & m_ste[s]))) n_global++;
    m_a = f & m_ste[s];
    @(negedge clk);
    sym_valid = 0;
    checks++;
    if (a_out !== m_a) begin failures++; $display("symbol %0d: a=%b expected %b", s, a_out, m_a); end
    checks++;
    if (match !== |(m_a & m_acc)) begin failures++; $display("symbol %0d: match=%b", s, match); end
    if (|(m_a & m_acc)) n_accept++; else n_reject++;
  endtask

  task automatic run_seq(string str, bit exp_acc, logic [PART-1:0] exp_a);
    for (int k = 0; k < str.len(); k++) step(int'(str[k]) - int'("a"), k == 0, '0);
    checks++;
    if (match !== exp_acc || a_out !== exp_a) begin
      failures++;
      $display("\"%s\": a=%b accept=%b, expected a=%b accept=%b", str, a_out, match, exp_a, exp_acc);
    end
  endtask

  initial begin
    cfg_we = 0; sym_valid = 0; sym_first = 0; sym = '0; gl_in = '0;
    cfg_target = AP_CFG_STE; cfg_row = '0; cfg_data = '0; m_a = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (a_out !== '0) begin failures++; $display("Active Vector not cleared by reset"); end
    rst_n = 1;
    // Example automaton; bit n-1 is state Sn.
    cfg(AP_CFG_STE, 0, 3'b001);   // a: S1
    cfg(AP_CFG_STE, 1, 3'b101);   // b: S1, S3
    cfg(AP_CFG_STE, 2, 3'b011);   // c: S1, S2
    cfg(AP_CFG_STE, 3, 3'b000);   // d: none
    cfg(AP_CFG_LOCAL, 0, 3'b110); // S1 -> S2, S3
    cfg(AP_CFG_LOCAL, 1, 3'b100); // S2 -> S3
    cfg(AP_CFG_LOCAL, 2, 3'b000);
    cfg(AP_CFG_LOCAL, 3, 3'b000);
    cfg(AP_CFG_LOCAL, 4, 3'b000);
    cfg(AP_CFG_ACCEPT, 0, 3'b100);
    cfg(AP_CFG_START, 0, 3'b001);
    run_seq("ab", 1, 3'b100);
    run_seq("acb", 1, 3'b100);
    run_seq("bd", 0, 3'b000);
    run_seq("aa", 0, 3'b000);
    run_seq("ac", 0, 3'b010);
    // Random configurations and streams, with global input lines.
    for (int trial = 0; trial < 20; trial++) begin
      for (int r = 0; r < SYMS; r++) cfg(AP_CFG_STE, r, PART'($urandom));
      for (int r = 0; r < LROWS; r++) cfg(AP_CFG_LOCAL, r, PART'($urandom) & PART'($urandom));
      cfg(AP_CFG_ACCEPT, 0, PART'($urandom));
      cfg(AP_CFG_START, 0, PART'($urandom));
      for (int k = 0; k < 60; k++) step($urandom_range(SYMS-1), k % 15 == 0, GI'($urandom) & GI'($urandom));
    end
    checks++;
    if (n_accept == 0 || n_reject == 0 || n_global == 0) begin
      failures++;
      $display("mechanism missing: accept %0d reject %0d global %0d", n_accept, n_reject, n_global);
    end
    $display("accepts %0d rejects %0d global-routed %0d", n_accept, n_reject, n_global);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
