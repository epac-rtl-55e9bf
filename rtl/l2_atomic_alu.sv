// l2_atomic_alu: the L2's far-atomic ALU.
//
// Computes the value that an atomic operation leaves in a 64-bit word of a
// cache line: add, bit clear, exclusive or, bit set, signed/unsigned max and
// min, swap and compare-and-swap (the word takes swap_val only if it equals
// compare_val). Purely combinational; the L2 slice reads the word, passes it
// through here and writes the result back in the same cycle, returning the
// old value to the requester. The L2 of the chip has an atomic ALU so that
// atomics run at the cache instead of at a core; the operation set (taken
// from the CHI atomic operations) and the 64-bit operand width are this
// design's choices.
module l2_atomic_alu
  import epac_pkg::*;
(
  input  amo_op_e     op,
  input  logic [63:0] old_val,
  input  logic [63:0] operand,
  input  logic [63:0] compare_val,
  output logic [63:0] new_val
);
  always_comb begin
    unique case (op)
      AMO_ADD:  new_val = old_val + operand;
      AMO_CLR:  new_val = old_val & ~operand;
      AMO_EOR:  new_val = old_val ^ operand;
      AMO_SET:  new_val = old_val | operand;
      AMO_SMAX: new_val = ($signed(old_val) > $signed(operand)) ? old_val : operand;
      AMO_SMIN: new_val = ($signed(old_val) < $signed(operand)) ? old_val : operand;
      AMO_UMAX: new_val = (old_val > operand) ? old_val : operand;
      AMO_UMIN: new_val = (old_val < operand) ? old_val : operand;
      AMO_SWAP: new_val = operand;
      AMO_CAS:  new_val = (old_val == compare_val) ? operand : old_val;
      default:  new_val = old_val;
    endcase
  end
endmodule
