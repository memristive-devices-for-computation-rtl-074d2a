// Self-checking test of symbol_decoder: every symbol with the enable high
// must raise exactly its own word line; with the enable low none may rise.
module tb_symbol_decoder;
  localparam int unsigned W = 8;
  logic en;
  logic [W-1:0] sym;
  logic [2**W-1:0] wl;
  int checks = 0, failures = 0;

  symbol_decoder #(.W(W)) dut (.en, .sym, .wl);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int s = 0; s < 2**W; s++) begin
        en = e[0]; sym = W'(s);
        #1;
        checks++;
        if (e == 1) begin
          if (wl !== ((2**W)'(1) << s)) begin failures++; $display("sym %0d: wrong word line", s); end
        end else if (wl !== '0) begin failures++; $display("sym %0d: word line with enable low", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
