// tb_l2_interleave: checks the home-slice selection of every interleaving
// mode on random addresses, and that line mode spreads four consecutive lines
// over four different slices.
module tb_l2_interleave;
  import epac_pkg::*;
  int checks = 0, failures = 0;
  logic [1:0] mode;
  logic [ADDR_W-1:0] addr;
  logic [1:0] slice;
  l2_interleave dut (.mode, .addr, .slice);
  function automatic logic [1:0] model(logic [1:0] m, logic [ADDR_W-1:0] a);
    logic [63:0] x;
    x = 64'(a);
    case (m)
      0: return 2'((x >> 6) % 4);
      1: return 2'((x >> 12) % 4);
      2: return 2'(((x >> 6) ^ (x >> 12) ^ (x >> 20)) % 4);
      default: return 2'd0;
    endcase
  endfunction
  initial begin
    for (int n = 0; n < 2000; n++) begin
      mode = 2'(n % 4);
      addr = {8'($urandom), $urandom};
      #1;
      checks++;
      if (slice !== model(mode, addr)) begin failures++; $display("mode %0d addr %h slice %0d", mode, addr, slice); end
    end
    begin
      logic [3:0] seen;
      seen = '0;
      mode = 0;
      for (int l = 0; l < 4; l++) begin addr = ADDR_W'(64 * l + 'h1000_0000); #1; seen[slice] = 1'b1; end
      checks++;
      if (seen != 4'hF) begin failures++; $display("line mode does not spread"); end
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
