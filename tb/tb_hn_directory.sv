// tb_hn_directory: self-checking test of the home-node directory.
// Random requests from 8 request nodes on a handful of directory entries,
// with random drop responses in the same cycles (sometimes on the same
// entry). The reference model here tracks what each request node's cache
// holds (I, S or E) and from it derives the snoops and granted state each
// request must produce. Checks the one-cycle result latency, and that
// downgrade snoops, invalidating snoops, exclusive and shared grants, and a
// same-cycle request/response on one entry all happened.
module tb_hn_directory;
  import epac_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, rsp_valid, out_valid, out_snp_unique;
  logic [1:0] req_kind;
  logic [2:0] req_rn, rsp_rn, req_way, rsp_way;
  logic [8:0] req_set, rsp_set;
  logic [N-1:0] out_snp_mask;
  logic [3:0] out_grant;
  logic ready;
  hn_directory dut (.*);

  // cached state per entry (8 entries used) and RN: 0 I, 1 S, 2 E
  int cs [8][N];
  int n_down = 0, n_inv = 0, n_e = 0, n_s = 0, n_same = 0;

  function automatic logic [8:0] set_of(int e); return 9'(e * 37); endfunction
  function automatic logic [2:0] way_of(int e); return 3'(e % 8); endfunction

  initial begin
    req_valid = 0; rsp_valid = 0; req_kind = 0; req_rn = 0; rsp_rn = 0;
    req_set = 0; req_way = 0; rsp_set = 0; rsp_way = 0;
    for (int e = 0; e < 8; e++) for (int r = 0; r < N; r++) cs[e][r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // no entry may be used before the directory has cleared itself
    checks++;
    if (ready) begin failures++; $display("ready straight after reset"); end
    wait (ready);
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      int e, r, k, pe, pr;
      logic [N-1:0] exp_mask; logic exp_u; logic [3:0] exp_g;
      logic do_rsp;
      e = $urandom_range(0, 7); r = $urandom_range(0, N-1);
      k = $urandom_range(0, 9);
      k = (k < 5) ? 0 : (k < 8) ? 1 : (k < 9) ? 2 : 3;
      do_rsp = ($urandom_range(0, 2) == 0);
      pe = $urandom_range(0, 7); pr = $urandom_range(0, N-1);
      if (do_rsp && pe == e) n_same++;
      @(negedge clk);
      req_valid = 1; req_kind = 2'(k); req_rn = 3'(r); req_set = set_of(e); req_way = way_of(e);
      rsp_valid = do_rsp; rsp_rn = 3'(pr); rsp_set = set_of(pe); rsp_way = way_of(pe);
      // reference: response first
      if (do_rsp) cs[pe][pr] = 0;
      exp_mask = '0; exp_u = 0; exp_g = 0;
      case (k)
        0: begin
          logic others_any, others_e;
          others_any = 0; others_e = 0;
          for (int q = 0; q < N; q++) if (q != r) begin
            if (cs[e][q] != 0) others_any = 1;
            if (cs[e][q] == 2) begin others_e = 1; exp_mask[q] = 1; end
          end
          if (others_e) begin
            for (int q = 0; q < N; q++) if (cs[e][q] == 2) cs[e][q] = 1;
            cs[e][r] = 1; exp_g = RESP_S; n_down++;
          end else if (others_any || cs[e][r] == 1) begin
            cs[e][r] = 1; exp_g = RESP_S; n_s++;
          end else begin
            cs[e][r] = 2; exp_g = RESP_E; n_e++;
          end
        end
        1: begin
          for (int q = 0; q < N; q++) if (q != r && cs[e][q] != 0) begin exp_mask[q] = 1; cs[e][q] = 0; end
          exp_u = 1; cs[e][r] = 2; exp_g = RESP_E; n_e++;
          if (exp_mask != 0) n_inv++;
        end
        default: begin
          for (int q = 0; q < N; q++) if (cs[e][q] != 0) begin exp_mask[q] = 1; cs[e][q] = 0; end
          exp_u = 1;
          if (exp_mask != 0) n_inv++;
        end
      endcase
      @(negedge clk);
      req_valid = 0; rsp_valid = 0;
      checks++;
      if (!out_valid || out_snp_mask != exp_mask || out_grant != exp_g || (exp_mask != 0 && out_snp_unique != exp_u)) begin
        failures++;
        $display("n%0d e%0d rn%0d kind%0d: mask %b/%b grant %0d/%0d u %0d/%0d", n, e, r, k,
                 out_snp_mask, exp_mask, out_grant, exp_g, out_snp_unique, exp_u);
      end
    end
    checks++; if (n_down == 0) begin failures++; $display("no downgrade"); end
    checks++; if (n_inv == 0)  begin failures++; $display("no invalidation"); end
    checks++; if (n_e == 0 || n_s == 0) begin failures++; $display("grant kinds missing"); end
    checks++; if (n_same == 0) begin failures++; $display("no same-entry collision"); end
    $display("downgrades %0d invalidations %0d E %0d S %0d same-entry %0d", n_down, n_inv, n_e, n_s, n_same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
