// Self-checking test of scouting_sa: every reference setting against every
// bit-line level (0, 1 or 2 low-resistance cells), with the expected outputs
// taken from the truth tables of Read, OR, AND and XOR.
module tb_scouting_sa;
  import cim_pkg::*;
  localparam int unsigned COLS = 16;
  logic [COLS-1:0][1:0] level;
  sa_ref_e sa_ref;
  logic [COLS-1:0] out;
  int checks = 0, failures = 0;

  scouting_sa #(.COLS(COLS)) dut (.level, .sa_ref, .out);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b, e;
    for (int k = 0; k < 200; k++) begin
      logic [COLS-1:0] va, vb;
      va = COLS'($urandom); vb = COLS'($urandom);
      for (int c = 0; c < COLS; c++) level[c] = {1'b0, va[c]} + {1'b0, vb[c]};
      for (int r = 0; r < 4; r++) begin
        sa_ref = sa_ref_e'(r);
        #1;
        for (int c = 0; c < COLS; c++) begin
          a = va[c]; b = vb[c];
          unique case (sa_ref)
            SA_OR:   e = a | b;
            SA_AND:  e = a & b;
            SA_XOR:  e = a ^ b;
            default: e = a | b;
          endcase
          checks++;
          if (out[c] !== e) begin failures++; $display("ref %0d a=%b b=%b got %b", r, a, b, out[c]); end
        end
      end
      // Single-row read: only one cell drives the bit line.
      for (int c = 0; c < COLS; c++) level[c] = {1'b0, va[c]};
      sa_ref = SA_READ;
      #1;
      checks++;
      if (out !== va) begin failures++; $display("read got %h expected %h", out, va); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
