// tb_l2_atomic_alu: checks every far-atomic operation of the L2 atomic ALU
// against values computed here, on random and on corner-case operands
// (sign boundaries, equal operands for compare-and-swap).
module tb_l2_atomic_alu;
  import epac_pkg::*;
  int checks = 0, failures = 0;
  amo_op_e op;
  logic [63:0] o, v, c, r;
  l2_atomic_alu dut (.op(op), .old_val(o), .operand(v), .compare_val(c), .new_val(r));
  function automatic logic [63:0] model(amo_op_e k, logic [63:0] a, logic [63:0] b, logic [63:0] cc);
    longint sa, sb;
    sa = longint'(a); sb = longint'(b);
    case (k)
      AMO_ADD:  return a + b;
      AMO_CLR:  return a & ~b;
      AMO_EOR:  return a ^ b;
      AMO_SET:  return a | b;
      AMO_SMAX: return (sa > sb) ? a : b;
      AMO_SMIN: return (sa < sb) ? a : b;
      AMO_UMAX: return (a > b) ? a : b;
      AMO_UMIN: return (a < b) ? a : b;
      AMO_SWAP: return b;
      AMO_CAS:  return (a === cc) ? b : a;
      default:  return a;
    endcase
  endfunction
  logic [63:0] corner [4] = '{64'h0, 64'h7FFF_FFFF_FFFF_FFFF, 64'h8000_0000_0000_0000, 64'hFFFF_FFFF_FFFF_FFFF};
  initial begin
    for (int n = 0; n < 4000; n++) begin
      op = amo_op_e'(n % 10);
      if (n < 160) begin o = corner[(n / 10) % 4]; v = corner[(n / 40) % 4]; end
      else begin o = {$urandom, $urandom}; v = {$urandom, $urandom}; end
      c = (n % 3 == 0) ? o : {$urandom, $urandom};
      #1;
      checks++;
      if (r !== model(op, o, v, c)) begin
        failures++;
        $display("op %s old %h opnd %h cmp %h got %h", op.name(), o, v, c, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
