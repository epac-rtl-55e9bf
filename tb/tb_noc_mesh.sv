// tb_noc_mesh: self-checking test of the 3 x 2 crosspoint mesh.
// Every one of the 12 device ports sends flits on all four channels to random
// device ports (itself included); sinks apply random back-pressure. Every flit
// must arrive once, at the device its target id names, on the channel it was
// sent on, and flits between one source and one target must keep their order
// (dimension-order routing has one path per pair). The idle-mesh latency from
// corner device 0 to corner device 11 is checked: the flit crosses 4
// crosspoints, each costing one cycle in its input buffer and one in its
// registered output, so 8 cycles.
module tb_noc_mesh;
  import epac_pkg::*;
  localparam int D = MESH_X * MESH_Y * 2;
  localparam int NPER = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [N_CH-1:0][D-1:0] iv, ic, ov, oc, sv, sr, kv, kr;
  flit_t [N_CH-1:0][D-1:0] ifl, ofl, sf, kf;
  noc_mesh dut (.clk, .rst_n, .dev_in_valid(iv), .dev_in_flit(ifl), .dev_in_credit(ic),
                .dev_out_valid(ov), .dev_out_flit(ofl), .dev_out_credit(oc));
  for (genvar c = 0; c < N_CH; c++) begin : g_c
    for (genvar i = 0; i < D; i++) begin : g_i
      noc_ep_tx u_tx (.clk, .rst_n, .in_valid(sv[c][i]), .in_ready(sr[c][i]), .in_flit(sf[c][i]),
                      .link_valid(iv[c][i]), .link_flit(ifl[c][i]), .link_credit(ic[c][i]));
      noc_ep_rx u_rx (.clk, .rst_n, .link_valid(ov[c][i]), .link_flit(ofl[c][i]), .link_credit(oc[c][i]),
                      .out_valid(kv[c][i]), .out_ready(kr[c][i]), .out_flit(kf[c][i]));
    end
  end

  function automatic node_id_t id_of(int d);
    node_id_t t;
    t.p = 1'(d % 2); t.x = XW'((d / 2) % MESH_X); t.y = YW'(d / (2 * MESH_X));
    return t;
  endfunction

  int last_seq [N_CH][D][D];   // [ch][dst][src]
  int total_rcvd = 0;
  logic go = 1'b0;
  logic probe = 1'b0;

  initial begin
    sv = '0; sf = '0;
    for (int c = 0; c < N_CH; c++) for (int a = 0; a < D; a++) for (int b = 0; b < D; b++) last_seq[c][a][b] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    begin
      flit_t f; longint t0, t1;
      f = '0; f.tgt = id_of(D-1); f.txn = 0; f.data[31:0] = 32'hFFFF_FFFF;
      probe = 1'b1;
      sv[3][0] = 1'b1; sf[3][0] = f;
      @(negedge clk); sv[3][0] = 1'b0;
      while (!iv[3][0]) @(negedge clk);
      t0 = $time;
      while (!ov[3][D-1]) @(negedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != 8) begin failures++; $display("corner latency %0d cycles, want 8", (t1 - t0) / 10); end
      repeat (5) @(negedge clk);
      probe = 1'b0;
    end
    go = 1'b1;
  end

  for (genvar gc = 0; gc < N_CH; gc++) begin : g_src_c
    for (genvar gi = 0; gi < D; gi++) begin : g_src_i
      initial begin
        wait (go);
        for (int n = 0; n < NPER; n++) begin
          flit_t f;
          f = '0;
          f.tgt = id_of($urandom_range(0, D-1));
          f.src = id_of(gi);
          f.txn = TXN_W'(gi);
          f.data[31:0] = 32'(n);
          f.data[39:32] = 8'(gc);
          @(negedge clk);
          sv[gc][gi] = 1'b1; sf[gc][gi] = f;
          while (!sr[gc][gi]) @(negedge clk);
          @(negedge clk);
          sv[gc][gi] = 1'b0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int c = 0; c < N_CH; c++) for (int o = 0; o < D; o++) kr[c][o] = ($urandom_range(0, 3) != 0);
    if (rst_n)
    for (int c = 0; c < N_CH; c++) for (int o = 0; o < D; o++) if (kv[c][o] && kr[c][o]) begin
      flit_t f; int i, n;
      f = kf[c][o];
      if (f.data[31:0] != 32'hFFFF_FFFF) begin
        i = int'(f.txn); n = int'(f.data[31:0]);
        checks++;
        if (f.tgt != id_of(o) || int'(f.data[39:32]) != c || n <= last_seq[c][o][i]) begin
          failures++;
          $display("bad flit ch%0d at dev%0d from dev%0d seq%0d (last %0d)", c, o, i, n, last_seq[c][o][i]);
        end
        if (n > last_seq[c][o][i]) last_seq[c][o][i] = n;
        total_rcvd++;
      end
    end
  end

  initial begin
    wait (total_rcvd == N_CH * D * NPER);
    repeat (20) @(posedge clk);
    checks++;
    if (total_rcvd != N_CH * D * NPER) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog: received %0d of %0d", total_rcvd, N_CH * D * NPER);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
