// zero_skip_logic: the AND stage of the zero-skipping logic of one fragment.
// Each of the FRAG input shift registers feeding a sub-array row reports the
// NOR of its remaining bits; this block ANDs them. A 1 means every input of
// the fragment has no non-zero bit left, so feeding more bits would only add
// zeros: the controller stops shifting, lets the ADC finish and loads the next
// inputs. The NOR/AND structure is the paper's. Purely combinational.
module zero_skip_logic #(
  parameter int FRAG = 8
) (
  input  logic [FRAG-1:0] reg_zero,
  output logic            frag_done
);
  assign frag_done = &reg_zero;
endmodule
