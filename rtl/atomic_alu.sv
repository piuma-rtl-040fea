// atomic_alu: the read-modify-write operator of the remote atomics.
//
// Remote atomics are performed where the data lives (memory controller or
// scratchpad) instead of in the core. Given the old memory word, an operand
// and, for compare-and-swap, a second operand, it returns the new word to be
// written back; the old word is what the requester receives. Purely
// combinational. Signed 64-bit min/max. CAS writes `operand` when the old
// word equals `operand2`. The set of operations is this design's choice: the
// paper names remote atomics but does not list them.
module atomic_alu
  import piuma_pkg::*;
(
  input  atop_e       op,
  input  logic [63:0] old_val,
  input  logic [63:0] operand,
  input  logic [63:0] operand2,
  output logic [63:0] new_val
);
  always_comb begin
    unique case (op)
      AT_ADD:  new_val = old_val + operand;
      AT_AND:  new_val = old_val & operand;
      AT_OR:   new_val = old_val | operand;
      AT_XOR:  new_val = old_val ^ operand;
      AT_MIN:  new_val = ($signed(operand) < $signed(old_val)) ? operand : old_val;
      AT_MAX:  new_val = ($signed(operand) > $signed(old_val)) ? operand : old_val;
      AT_SWAP: new_val = operand;
      AT_CAS:  new_val = (old_val == operand2) ? operand : old_val;
      default: new_val = old_val;
    endcase
  end
endmodule
