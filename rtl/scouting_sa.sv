// Scouting-logic sense amplifiers of the Memristive Vector Processor.
//
// One sense amplifier per bit line compares the bit-line current with a
// reference; moving the reference turns a read of one or two rows into a
// logic gate. With level = number of low-resistance cells among the active
// rows (0: 2Vr/RH or Vr/RH, 1: about Vr/RL, 2: 2Vr/RL):
//   SA_READ  one row,  Iref between Vr/RH and Vr/RL    -> out = level >= 1
//   SA_OR    two rows, Iref between 2Vr/RH and Vr/RL   -> out = level >= 1
//   SA_AND   two rows, Iref between Vr/RL and 2Vr/RL   -> out = level >= 2
//   SA_XOR   two rows, Iref1 and Iref2 around Vr/RL    -> out = level == 1
// The thresholds follow the paper's reference placement; the analog
// comparison itself is reduced to these level comparisons. Combinational.
module scouting_sa
  import cim_pkg::*;
#(
  parameter int unsigned COLS = 1024
) (
  input  logic [COLS-1:0][1:0] level,
  input  sa_ref_e              sa_ref,
  output logic [COLS-1:0]      out
);
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      unique case (sa_ref)
        SA_READ, SA_OR: out[c] = (level[c] >= 2'd1);
        SA_AND:         out[c] = (level[c] >= 2'd2);
        SA_XOR:         out[c] = (level[c] == 2'd1);
        default:        out[c] = 1'b0;
      endcase
    end
  end
endmodule
