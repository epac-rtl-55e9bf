// tb_reg_rename: self-checking test of the renaming unit at the vector
// unit's size (32 architectural on 40 physical registers).
// A stream of random instructions is renamed; each one's replaced register
// is handed back when it "retires", in order, after a random delay, and its
// result is written back out of order. A model here keeps its own map
// table, a queue of free registers and the ready bits, and every output is
// compared with it in every cycle. Also checked: the architectural
// registers always map to distinct physical ones, and renaming stalls while
// the free list is empty and resumes when registers come back.
module tb_reg_rename;
  localparam int NL = 32, NP = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ren_valid, ren_ready, ren_wr, ren_rdy1, ren_rdy2, rel_valid, wb_valid;
  logic [4:0] ren_src1, ren_src2, ren_dst;
  logic [5:0] ren_psrc1, ren_psrc2, ren_pdst, ren_pold, rel_preg, wb_preg;
  logic [5:0] free_count;
  reg_rename #(.N_LOG(NL), .N_PHYS(NP)) dut (.*);

  int map [NL];
  int freeq [$];
  int rdy [NP];
  int retq [$];     // replaced registers, in program order
  int wbq [$];      // destinations still to be written
  int n_stall = 0, n_ren = 0, n_rel = 0, n_wb = 0, n_notrdy = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    ren_valid = 0; ren_wr = 0; ren_src1 = 0; ren_src2 = 0; ren_dst = 0;
    rel_valid = 0; rel_preg = 0; wb_valid = 0; wb_preg = 0;
    for (int i = 0; i < NL; i++) map[i] = i;
    for (int i = NL; i < NP; i++) freeq.push_back(i);
    for (int i = 0; i < NP; i++) rdy[i] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      // drive
      ren_valid = $urandom_range(0, 3) != 0;
      ren_wr    = $urandom_range(0, 7) != 0;
      ren_src1  = 5'($urandom); ren_src2 = 5'($urandom); ren_dst = 5'($urandom);
      // hold registers back for a while in some phases so the list runs dry
      rel_valid = (retq.size() != 0) && ($urandom_range(0, 3) < ((n / 500) % 2 ? 1 : 3));
      rel_preg  = rel_valid ? 6'(retq[0]) : '0;
      wb_valid  = (wbq.size() != 0) && $urandom_range(0, 1);
      if (wb_valid) begin
        int k; k = $urandom_range(0, wbq.size() - 1);
        wb_preg = 6'(wbq[k]); wbq.delete(k);
      end
      #1;
      // compare
      check("free count", int'(free_count), freeq.size());
      check("ready", int'(ren_ready), int'(!ren_wr || freeq.size() != 0));
      check("psrc1", int'(ren_psrc1), map[ren_src1]);
      check("psrc2", int'(ren_psrc2), map[ren_src2]);
      check("rdy1", int'(ren_rdy1), rdy[map[ren_src1]]);
      check("rdy2", int'(ren_rdy2), rdy[map[ren_src2]]);
      check("pold", int'(ren_pold), map[ren_dst]);
      if (freeq.size() != 0) check("pdst", int'(ren_pdst), freeq[0]);
      if (ren_valid && !ren_rdy1) n_notrdy++;
      // update the model as the edge will
      if (rel_valid) begin freeq.push_back(retq.pop_front()); n_rel++; end
      if (wb_valid) begin rdy[wb_preg] = 1; n_wb++; end
      if (ren_valid && ren_wr) begin
        if (freeq.size() - int'(rel_valid) == 0) n_stall++;
        else begin
          int p;
          p = freeq.pop_front();     // a register released now joined the tail
          retq.push_back(map[ren_dst]);
          map[ren_dst] = p; rdy[p] = 0; wbq.push_back(p);
          n_ren++;
        end
      end
      // distinct mapping
      begin
        int seen [NP];
        for (int i = 0; i < NP; i++) seen[i] = 0;
        for (int i = 0; i < NL; i++) seen[map[i]]++;
        foreach (freeq[i]) seen[freeq[i]]++;
        foreach (retq[i]) seen[retq[i]]++;
        for (int i = 0; i < NP; i++) if (seen[i] != 1) begin failures++; $display("register %0d held %0d times", i, seen[i]); end
        checks++;
      end
    end
    checks++; if (n_stall == 0) begin failures++; $display("never: stall on empty free list"); end
    checks++; if (n_notrdy == 0) begin failures++; $display("never: source not ready"); end
    $display("renamed %0d, stalls %0d, releases %0d, write-backs %0d, not-ready sources %0d",
             n_ren, n_stall, n_rel, n_wb, n_notrdy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
