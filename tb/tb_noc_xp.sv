// tb_noc_xp: self-checking test of one crosspoint (placed at x=1, y=0).
// Each of the six inputs of each of the four channels sends flits with random
// targets; sinks take them with random back-pressure. The expected output
// port of each flit is computed here from the X-first rule, and every flit
// must come out once, on that port and channel, in order per input/output
// pair. A lone flit must cross an idle crosspoint in 2 cycles.
module tb_noc_xp;
  import epac_pkg::*;
  localparam int P = XP_PORTS;
  localparam int NPER = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [N_CH-1:0][P-1:0] iv, ic, ov, oc;
  flit_t [N_CH-1:0][P-1:0] ifl, ofl;
  noc_xp #(.X(1), .Y(0)) dut (.clk, .rst_n, .in_valid(iv), .in_flit(ifl), .in_credit(ic),
                              .out_valid(ov), .out_flit(ofl), .out_credit(oc));

  logic  [N_CH-1:0][P-1:0] sv, sr, kv, kr;
  flit_t [N_CH-1:0][P-1:0] sf, kf;
  for (genvar c = 0; c < N_CH; c++) begin : g_c
    for (genvar i = 0; i < P; i++) begin : g_i
      noc_ep_tx u_tx (.clk, .rst_n, .in_valid(sv[c][i]), .in_ready(sr[c][i]), .in_flit(sf[c][i]),
                      .link_valid(iv[c][i]), .link_flit(ifl[c][i]), .link_credit(ic[c][i]));
      noc_ep_rx u_rx (.clk, .rst_n, .link_valid(ov[c][i]), .link_flit(ofl[c][i]), .link_credit(oc[c][i]),
                      .out_valid(kv[c][i]), .out_ready(kr[c][i]), .out_flit(kf[c][i]));
    end
  end

  function automatic int exp_port(node_id_t t);
    if (t.x == 2) return XP_E;
    if (t.x == 0) return XP_W;
    if (t.y == 1) return XP_S;
    return t.p ? XP_D1 : XP_D0;
  endfunction

  // random legal target for input i: no U-turns (a real neighbour never
  // sends a flit back where it came from)
  function automatic node_id_t rnd_tgt(int i);
    node_id_t t;
    forever begin
      t.x = XW'($urandom_range(0, 2)); t.y = YW'($urandom_range(0, 1)); t.p = 1'($urandom);
      if (exp_port(t) != i) return t;
    end
  endfunction

  int sent [N_CH][P];
  int rcvd [N_CH][P];
  int last_seq [N_CH][P][P];   // [ch][out][in]
  int total_rcvd = 0;

  // sources
  initial begin
    sv = '0; sf = '0;
    for (int c = 0; c < N_CH; c++) for (int i = 0; i < P; i++) begin
      sent[c][i] = 0; rcvd[c][i] = 0;
      for (int o = 0; o < P; o++) last_seq[c][o][i] = -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // single-flit latency: input D0 -> output E on REQ
    begin
      flit_t f; longint t0, t1;
      f = '0; f.tgt.x = 2; f.data[7:0] = 8'hA5;
      @(negedge clk); sv[0][XP_D0] = 1'b1; sf[0][XP_D0] = f;
      @(negedge clk); sv[0][XP_D0] = 1'b0;
      while (!iv[0][XP_D0]) @(negedge clk);
      t0 = $time;
      while (!ov[0][XP_E]) @(negedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != 2) begin failures++; $display("latency %0d cycles, want 2", (t1-t0)/10); end
      repeat (4) @(posedge clk);
    end
    go = 1'b1;
  end

  logic go = 1'b0;
  for (genvar gc = 0; gc < N_CH; gc++) begin : g_src_c
    for (genvar gi = 0; gi < P; gi++) begin : g_src_i
      initial begin
        wait (go);
        for (int n = 0; n < NPER; n++) begin
          flit_t f;
          f = '0;
          f.tgt = rnd_tgt(gi);
          f.txn = TXN_W'(gi);
          f.data[31:0] = 32'(n);
          f.data[39:32] = 8'(gc);
          @(negedge clk);
          sv[gc][gi] = 1'b1; sf[gc][gi] = f;
          while (!sr[gc][gi]) @(negedge clk);
          @(negedge clk);
          sv[gc][gi] = 1'b0;
          sent[gc][gi]++;
          repeat ($urandom_range(0, 2)) @(negedge clk);
        end
      end
    end
  end

  // the sink decides at the falling edge whether it takes a flit at the next
  // rising edge, and records that flit then
  int skip_first = 1;
  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++) for (int o = 0; o < P; o++) kr[c][o] = ($urandom_range(0, 3) != 0);
    if (rst_n)
    for (int c = 0; c < N_CH; c++) for (int o = 0; o < P; o++) if (kv[c][o] && kr[c][o]) begin
      flit_t f; int i, n;
      f = kf[c][o];
      if (f.data[7:0] == 8'hA5 && f.data[39:8] == 0 && skip_first == 1 && c == 0) begin
        skip_first = 0;  // the latency probe flit
      end else begin
        i = int'(f.txn); n = int'(f.data[31:0]);
        checks++;
        if (exp_port(f.tgt) != o || int'(f.data[39:32]) != c || n <= last_seq[c][o][i]) begin
          failures++;
          $display("bad flit ch%0d out%0d in%0d seq%0d (last %0d)", c, o, i, n, last_seq[c][o][i]);
        end
        // per-pair order: sequence numbers of one input seen at one output rise
        if (n > last_seq[c][o][i]) last_seq[c][o][i] = n;
        total_rcvd++;
      end
    end
  end
  initial begin
    wait (total_rcvd == N_CH * P * NPER);
    repeat (10) @(posedge clk);
    checks++;
    if (total_rcvd != N_CH * P * NPER) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: received %0d of %0d", total_rcvd, N_CH * P * NPER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
