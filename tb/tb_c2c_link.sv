// tb_c2c_link: two ends of the C2C link joined by a lane model with a
// 4-cycle delay each way that can flip bits.
// Phase 1 (clean lanes): 90 flits in one direction; the link must carry one
// flit per frame time (3 cycles for a 630-bit frame on 8 x 32-bit lanes).
// Phase 2: random flits on all channels in both directions, random receive
// back-pressure, and bit errors injected into about one frame in 25 in each
// direction. Every flit must be delivered exactly once and in order on its
// channel; CRC failures and replays must both have happened.
module tb_c2c_link;
  import epac_pkg::*;
  localparam int DLY = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [1:0][N_CH-1:0] txv, txr, rxv, rxr;
  flit_t [1:0][N_CH-1:0] txf, rxf;
  logic  [1:0][7:0][31:0] lo, li;
  logic  [1:0] so, si, crc_err, replay;

  for (genvar e = 0; e < 2; e++) begin : g_end
    c2c_link u (.clk, .rst_n, .tx_valid(txv[e]), .tx_ready(txr[e]), .tx_flit(txf[e]),
                .rx_valid(rxv[e]), .rx_ready(rxr[e]), .rx_flit(rxf[e]),
                .tx_lanes(lo[e]), .tx_sof(so[e]), .rx_lanes(li[e]), .rx_sof(si[e]),
                .stat_crc_err(crc_err[e]), .stat_replay(replay[e]));
  end

  // lanes: delay line with bit flips
  logic [DLY-1:0][1:0][7:0][31:0] dl;
  logic [DLY-1:0][1:0]            ds;
  int err_rate = 0;   // 1 in err_rate beats gets a flipped bit (0: none)
  int flips = 0;
  initial begin dl = '0; ds = '0; end
  always @(posedge clk) begin
    logic [1:0][7:0][31:0] l;
    l = lo;
    for (int e = 0; e < 2; e++)
      if (err_rate != 0 && $urandom_range(0, err_rate - 1) == 0) begin
        l[e][$urandom_range(0, 7)][$urandom_range(0, 31)] ^= 1'b1; flips++;
      end
    dl <= {dl[DLY-2:0], l};
    ds <= {ds[DLY-2:0], so};
  end
  assign li[0] = dl[DLY-1][1]; assign si[0] = ds[DLY-1][1];
  assign li[1] = dl[DLY-1][0]; assign si[1] = ds[DLY-1][0];

  // scoreboard: expected flits per direction and channel
  flit_t exp_q [2][N_CH][$];
  int delivered = 0, n_crc = 0, n_replay = 0;
  always @(posedge clk) begin
    for (int e = 0; e < 2; e++) begin
      if (crc_err[e]) n_crc++;
      if (replay[e]) n_replay++;
    end
  end

  int ready_pct = 100;
  longint t_first = 0, t_last = 0;
  always @(negedge clk) begin
    for (int e = 0; e < 2; e++) for (int c = 0; c < N_CH; c++) begin
      rxr[e][c] = ($urandom_range(0, 99) < ready_pct);
      if (rst_n && rxv[e][c] && rxr[e][c]) begin
        flit_t f;
        checks++;
        if (exp_q[1-e][c].size() == 0) begin failures++; $display("unexpected flit at end %0d ch %0d", e, c); end
        else begin
          f = exp_q[1-e][c].pop_front();
          if (rxf[e][c] != f) begin failures++; $display("wrong flit at end %0d ch %0d t=%0t got %h want %h q=%0d", e, c, $time, rxf[e][c].addr, f.addr, exp_q[1-e][c].size()); end
        end
        if (delivered == 0) t_first = $time;
        t_last = $time;
        delivered++;
      end
    end
  end

  task automatic send(int e, int c);
    flit_t f;
    f = '0;
    f.op = chi_op_e'($urandom_range(1, 14));
    f.addr = {8'($urandom), $urandom};
    for (int i = 0; i < 16; i++) f.data[i*32 +: 32] = $urandom;
    @(negedge clk);
    txv[e][c] = 1'b1; txf[e][c] = f;
    #1;   // tx_ready follows tx_valid combinationally
    while (!txr[e][c]) begin @(negedge clk); #1; end
    exp_q[e][c].push_back(f);
    @(posedge clk); #1;
    txv[e][c] = 1'b0;
  endtask

  logic go2 = 0;
  initial begin
    txv = '0; txf = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: rate
    for (int n = 0; n < 90; n++) send(0, 3);
    wait (delivered == 90);
    checks++;
    if ((t_last - t_first) / 10 > 3 * 89 + 3) begin
      failures++; $display("rate: 90 flits took %0d cycles, want %0d", (t_last - t_first) / 10, 3 * 89);
    end
    $display("phase 1: 90 flits in %0d cycles", (t_last - t_first) / 10);
    // phase 2: errors, both directions
    err_rate = 75; ready_pct = 70;
    go2 = 1;
  end
  int done2 = 0;
  for (genvar e = 0; e < 2; e++) begin : g_src
    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      initial begin
        wait (go2);
        for (int n = 0; n < 60; n++) begin
          send(e, c);
          repeat ($urandom_range(0, 12)) @(negedge clk);
        end
        done2++;
      end
    end
  end
  initial begin
    wait (done2 == 2 * N_CH);
    wait (delivered == 90 + 2 * N_CH * 60);
    repeat (50) @(posedge clk);
    checks++; if (delivered != 90 + 2 * N_CH * 60) failures++;
    checks++; if (n_crc == 0)    begin failures++; $display("no CRC error seen"); end
    checks++; if (n_replay == 0) begin failures++; $display("no replay"); end
    $display("bit flips %0d, CRC errors %0d, replays %0d", flips, n_crc, n_replay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: delivered %0d", delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
