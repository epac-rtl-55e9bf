// tb_l2_slice: self-checking test of one L2 slice at its full 256 kB size.
// Random reads, full-line writes and far atomics hit a small pool of
// addresses that maps 12 tags onto each of 3 sets, more than the 8 ways, so
// that hits, misses, clean and dirty evictions all happen. A flat reference
// memory here holds what every line must read as; a behavioural memory with
// random latency sits behind the slice. Checked: read data, atomic old
// values and results, that written-back lines come back intact, the 3-cycle
// hit latency, and that each mechanism (hit, miss, dirty eviction, atomic)
// happened.
module tb_l2_slice;
  import epac_pkg::*;
  localparam int SETS = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_hit, evict_valid;
  logic [1:0] req_op;
  logic [ADDR_W-1:0] req_addr, evict_addr, mem_req_addr;
  logic [LINE_BITS-1:0] req_wdata, rsp_rdata, mem_req_wdata, mem_rsp_rdata;
  amo_op_e req_amo;
  logic [63:0] req_amo_operand, req_amo_compare, rsp_amo_old;
  logic [8:0] rsp_set, evict_set;
  logic [2:0] rsp_way, evict_way;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;

  l2_slice dut (.*);

  // behavioural memory
  logic [LINE_BITS-1:0] mem [logic [ADDR_W-1:0]];
  function automatic logic [LINE_BITS-1:0] init_line(logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = 32'(a) ^ (32'h9E37_79B9 * 32'(i + 1));
    return l;
  endfunction
  int wbs = 0, fills = 0;
  initial begin
    mem_req_ready = 0; mem_rsp_valid = 0; mem_rsp_rdata = '0;
    forever begin
      @(negedge clk);
      mem_rsp_valid = 0;
      mem_req_ready = ($urandom_range(0, 2) != 0);
      if (mem_req_valid && mem_req_ready) begin
        logic [ADDR_W-1:0] a; logic w; logic [LINE_BITS-1:0] d;
        a = mem_req_addr; w = mem_req_write; d = mem_req_wdata;
        @(negedge clk);
        mem_req_ready = 0;
        if (w) begin mem[a] = d; wbs++; end
        else begin
          repeat ($urandom_range(1, 4)) @(negedge clk);
          mem_rsp_rdata = mem.exists(a) ? mem[a] : init_line(a);
          mem_rsp_valid = 1; fills++;
        end
      end
    end
  end

  // reference
  logic [LINE_BITS-1:0] ref_mem [logic [ADDR_W-1:0]];
  function automatic logic [63:0] amo_ref(amo_op_e op, logic [63:0] o, logic [63:0] v, logic [63:0] c);
    case (op)
      AMO_ADD:  return o + v;
      AMO_CLR:  return o & ~v;
      AMO_EOR:  return o ^ v;
      AMO_SET:  return o | v;
      AMO_SMAX: return ($signed(o) > $signed(v)) ? o : v;
      AMO_SMIN: return ($signed(o) < $signed(v)) ? o : v;
      AMO_UMAX: return (o > v) ? o : v;
      AMO_UMIN: return (o < v) ? o : v;
      AMO_SWAP: return v;
      AMO_CAS:  return (o == c) ? v : o;
      default:  return o;
    endcase
  endfunction

  int hits = 0, misses = 0, evicts = 0, atomics = 0;
  always @(posedge clk) if (evict_valid) evicts++;

  task automatic do_req(int op, logic [ADDR_W-1:0] a);
    logic [LINE_BITS-1:0] exp_line, wd;
    logic [63:0] opnd, cmp, oldw;
    amo_op_e k;
    int t0, lat;
    logic [ADDR_W-1:0] la;
    la = {a[ADDR_W-1:6], 6'd0};
    exp_line = ref_mem.exists(la) ? ref_mem[la] : init_line(la);
    for (int i = 0; i < 16; i++) wd[i*32 +: 32] = $urandom;
    opnd = {$urandom, $urandom}; cmp = {$urandom, $urandom};
    k = amo_op_e'($urandom_range(0, 9));
    if (k == AMO_CAS && $urandom_range(0, 1)) cmp = exp_line[a[5:3]*64 +: 64];
    @(negedge clk);
    req_valid = 1; req_op = 2'(op); req_addr = a; req_wdata = wd; req_amo = k;
    req_amo_operand = opnd; req_amo_compare = cmp;
    while (!req_ready) @(negedge clk);
    t0 = 0;
    @(negedge clk); req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    checks++;
    if (rsp_hit) begin
      hits++;
      if (lat != 3) begin failures++; $display("hit latency %0d, want 3", lat); end
    end else misses++;
    if (op == 0) begin
      checks++;
      if (rsp_rdata != exp_line) begin failures++; $display("read %h wrong", a); end
    end else if (op == 1) begin
      ref_mem[la] = wd;
    end else begin
      oldw = exp_line[a[5:3]*64 +: 64];
      checks++;
      if (rsp_amo_old != oldw) begin failures++; $display("atomic old %h wrong", a); end
      exp_line[a[5:3]*64 +: 64] = amo_ref(k, oldw, opnd, cmp);
      ref_mem[la] = exp_line;
      atomics++;
    end
  endtask

  initial begin
    req_valid = 0; req_op = 0; req_addr = 0; req_wdata = 0; req_amo = AMO_ADD;
    req_amo_operand = 0; req_amo_compare = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      logic [ADDR_W-1:0] a;
      int s, t;
      s = $urandom_range(0, 2) * 97;           // three sets
      t = $urandom_range(0, 11);               // twelve tags each
      a = {ADDR_W'(t) << 15} | (ADDR_W'(s) << 6) | (ADDR_W'($urandom_range(0, 7)) << 3);
      a = a & ~ADDR_W'(7);
      do_req($urandom_range(0, 2), {a[ADDR_W-1:6], 6'(a[5:0])} & {{(ADDR_W-6){1'b1}}, 6'b111000});
    end
    checks++; if (hits == 0)    begin failures++; $display("no hit"); end
    checks++; if (misses == 0)  begin failures++; $display("no miss"); end
    checks++; if (wbs == 0)     begin failures++; $display("no dirty eviction"); end
    checks++; if (atomics == 0) begin failures++; $display("no atomic"); end
    $display("hits %0d misses %0d evictions %0d writebacks %0d fills %0d atomics %0d",
             hits, misses, evicts, wbs, fills, atomics);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
