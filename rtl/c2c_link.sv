// c2c_link: one end of the chip-to-chip (C2C) link that extends the CHI NoC
// off chip, to the FPGA that holds the memory and I/O.
//
// Flits of the four NoC channels are tunnelled in frames. Every frame is
// protected by a CRC-32 (polynomial 04C11DB7) and spread over LANES SerDes
// lanes of LANE_W bits each, BEATS beats per frame, with tx_sof marking the
// first beat; frames are sent back to back, an idle frame when there is
// nothing to send, so that acknowledgements always flow.
//
// Reliability is go-back-N retransmission at link level. Each data frame has
// an 8-bit sequence number and stays in a WIN-entry replay buffer until the
// far end acknowledges it. Every frame also carries, for the opposite
// direction, a cumulative acknowledgement (last sequence number received in
// order) and a NAK flag. The receiver drops a frame with a bad CRC, an
// out-of-order frame, or one it has no room for, and then sends one NAK; the
// sender, on a NAK, or after TIMEOUT frames without progress, resends
// everything from the oldest unacknowledged frame. Delivered flits therefore
// arrive once and in order.
//
// NoC side: per channel a valid/ready input (tx_*) and output (rx_*); inputs
// are taken in fixed priority DAT, RSP, SNP, REQ. stat_crc_err and stat_replay
// pulse on a CRC failure and on each rewind.
// Eight lanes, CRC-checked packets and link-level retransmission follow the
// chip. Frame layout, CRC polynomial, lane width, window, timeout and go-back-N
// are this design's choices; the SerDes macros (serialisers, clock recovery,
// lane alignment) are outside this block, which drives their parallel side.
module c2c_link
  import epac_pkg::*;
#(
  parameter int unsigned LANES   = 8,
  parameter int unsigned LANE_W  = 32,
  parameter int unsigned WIN     = 8,
  parameter int unsigned RXQ     = 8,
  parameter int unsigned TIMEOUT = 32
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // NoC side
  input  logic  [N_CH-1:0]                    tx_valid,
  output logic  [N_CH-1:0]                    tx_ready,
  input  flit_t [N_CH-1:0]                    tx_flit,
  output logic  [N_CH-1:0]                    rx_valid,
  input  logic  [N_CH-1:0]                    rx_ready,
  output flit_t [N_CH-1:0]                    rx_flit,
  // SerDes side
  output logic  [LANES-1:0][LANE_W-1:0]       tx_lanes,
  output logic                                tx_sof,
  input  logic  [LANES-1:0][LANE_W-1:0]       rx_lanes,
  input  logic                                rx_sof,
  // status
  output logic                                stat_crc_err,
  output logic                                stat_replay
);
  typedef struct packed {
    logic       data;      // carries a flit
    logic [7:0] seq;
    logic       ack_v;
    logic [7:0] ack_seq;
    logic       nak;
    chi_ch_e    ch;
    flit_t      flit;
  } body_t;
  typedef struct packed {
    body_t       body;
    logic [31:0] crc;
  } frame_t;

  localparam int unsigned FW    = $bits(frame_t);
  localparam int unsigned BW    = LANES * LANE_W;
  localparam int unsigned BEATS = (FW + BW - 1) / BW;
  localparam int unsigned BTW   = (BEATS > 1) ? $clog2(BEATS) : 1;
  localparam int unsigned WW    = $clog2(WIN);

  function automatic logic [31:0] crc32(body_t b);
    logic [31:0] c;
    logic [$bits(body_t)-1:0] v;
    v = b;
    c = 32'hFFFF_FFFF;
    for (int i = $bits(body_t) - 1; i >= 0; i--)
      c = (c[31] ^ v[i]) ? ((c << 1) ^ 32'h04C1_1DB7) : (c << 1);
    return c;
  endfunction

  // ---------------------------------------------------------------- receive
  logic [BEATS*BW-1:0] rx_buf;
  logic [BTW-1:0]      rx_beat;
  logic                rx_done;
  frame_t              rx_fr;
  logic                rx_crc_ok;
  logic [7:0]          rx_exp;        // next expected sequence number
  logic                nak_pending, nak_armed;

  // receive queues, one per channel
  logic  [N_CH-1:0][$clog2(RXQ+1)-1:0] q_cnt;
  logic  [N_CH-1:0][$clog2(RXQ)-1:0]   q_wp, q_rp;
  flit_t                               q_mem [N_CH][RXQ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_buf <= '0; rx_beat <= '0; rx_done <= 1'b0;
    end else begin
      rx_done <= 1'b0;
      if (rx_sof || rx_beat != 0) begin
        rx_buf[(rx_sof ? 0 : int'(rx_beat)) * BW +: BW] <= rx_lanes;
        if (rx_sof && BEATS == 1) rx_done <= 1'b1;
        else if (rx_sof) rx_beat <= BTW'(1);
        else if (int'(rx_beat) == BEATS - 1) begin rx_beat <= '0; rx_done <= 1'b1; end
        else rx_beat <= rx_beat + 1'b1;
      end
    end
  end
  assign rx_fr     = rx_buf[FW-1:0];
  assign rx_crc_ok = (crc32(rx_fr.body) == rx_fr.crc);

  logic take;        // in-order data frame accepted into its queue
  assign take = rx_done && rx_crc_ok && rx_fr.body.data && rx_fr.body.seq == rx_exp
                && int'(q_cnt[rx_fr.body.ch]) < RXQ;

  for (genvar c = 0; c < N_CH; c++) begin : g_rxq
    logic push, pop;
    assign push        = take && rx_fr.body.ch == chi_ch_e'(c);
    assign pop         = rx_valid[c] && rx_ready[c];
    assign rx_valid[c] = (q_cnt[c] != 0);
    assign rx_flit[c]  = q_mem[c][q_rp[c]];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q_cnt[c] <= '0; q_wp[c] <= '0; q_rp[c] <= '0;
      end else begin
        if (push) q_wp[c] <= (int'(q_wp[c]) == RXQ-1) ? '0 : q_wp[c] + 1'b1;
        if (pop)  q_rp[c] <= (int'(q_rp[c]) == RXQ-1) ? '0 : q_rp[c] + 1'b1;
        q_cnt[c] <= q_cnt[c] + ($clog2(RXQ+1))'(push) - ($clog2(RXQ+1))'(pop);
      end
    end
    always_ff @(posedge clk) if (push) q_mem[c][q_wp[c]] <= rx_fr.body.flit;
  end

  // ---------------------------------------------------------------- transmit
  logic [7:0]  base, nxt, sptr;       // oldest unacked, next new, next to send
  logic [$clog2(N_CH)-1:0] pick;
  logic        have_new;
  logic [N_CH-1:0] tx_take;
  chi_ch_e     rb_ch  [WIN];
  flit_t       rb_flit[WIN];
  logic [BTW-1:0] tx_beat;
  logic [BEATS*BW-1:0] tx_buf;
  logic        slot;                  // a new frame is built this cycle
  logic [$clog2(TIMEOUT+1)-1:0] idle_frames;
  body_t       nb;

  assign slot = (tx_beat == '0);
  logic [BEATS*BW-1:0] frame_vec;
  assign frame_vec = (BEATS*BW)'({nb, crc32(nb)});

  always_comb begin
    have_new = 1'b0;
    pick     = '0;
    for (int c = 0; c < N_CH; c++)           // REQ lowest, DAT highest
      if (tx_valid[c]) begin have_new = 1'b1; pick = ($clog2(N_CH))'(c); end
  end

  logic send_new, send_old;
  assign send_old = slot && (sptr != nxt);
  assign send_new = slot && !send_old && have_new && (8'(nxt - base) < 8'(WIN));
  always_comb begin
    tx_take = '0;
    if (send_new) tx_take[pick] = 1'b1;
  end
  assign tx_ready = tx_take;

  always_comb begin
    nb         = '0;
    nb.ack_v   = 1'b1;
    nb.ack_seq = rx_exp - 8'd1;
    nb.nak     = nak_pending;
    if (send_old) begin
      nb.data = 1'b1; nb.seq = sptr;
      nb.ch   = rb_ch[sptr[WW-1:0]]; nb.flit = rb_flit[sptr[WW-1:0]];
    end else if (send_new) begin
      nb.data = 1'b1; nb.seq = nxt;
      nb.ch   = chi_ch_e'(pick); nb.flit = tx_flit[pick];
    end
  end

  always_ff @(posedge clk) begin
    if (send_new) begin
      rb_ch[nxt[WW-1:0]]   <= chi_ch_e'(pick);
      rb_flit[nxt[WW-1:0]] <= tx_flit[pick];
    end
  end

  // acknowledgements received from the far end
  logic       ack_in, nak_in;
  logic [7:0] ack_to;
  assign ack_in = rx_done && rx_crc_ok && rx_fr.body.ack_v;
  assign nak_in = rx_done && rx_crc_ok && rx_fr.body.nak;
  assign ack_to = rx_fr.body.ack_seq + 8'd1;
  // an acknowledgement is believed only if it lies inside the window
  logic ack_ok;
  assign ack_ok = ack_in && (8'(ack_to - base) <= 8'(nxt - base));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0; nxt <= '0; sptr <= '0; tx_beat <= '0; tx_buf <= '0;
      rx_exp <= '0; nak_pending <= 1'b0; nak_armed <= 1'b1;
      idle_frames <= '0; stat_crc_err <= 1'b0; stat_replay <= 1'b0;
      tx_sof <= 1'b0; tx_lanes <= '0;
    end else begin
      stat_crc_err <= 1'b0;
      stat_replay  <= 1'b0;
      // receive bookkeeping
      if (rx_done && !rx_crc_ok) stat_crc_err <= 1'b1;
      if (take) begin
        rx_exp    <= rx_exp + 8'd1;
        nak_armed <= 1'b1;
      end else if (rx_done && nak_armed && (!rx_crc_ok || (rx_fr.body.data &&
                   (rx_fr.body.seq == rx_exp || 8'(rx_fr.body.seq - rx_exp) < 8'd128)))) begin
        // bad frame, a gap, or no room: ask once for a resend (an old,
        // already delivered frame repeated by a rewind is just dropped)
        nak_pending <= 1'b1;
        nak_armed   <= 1'b0;
      end
      // transmit framing
      if (slot) begin
        tx_buf  <= frame_vec;
        if (nak_pending) nak_pending <= 1'b0;
      end
      tx_beat <= (int'(tx_beat) == BEATS - 1) ? '0 : tx_beat + 1'b1;
      tx_sof  <= slot;
      tx_lanes <= slot ? frame_vec[BW-1:0] : tx_buf[int'(tx_beat) * BW +: BW];
      // window
      if (send_new) nxt <= nxt + 8'd1;
      if (send_old) sptr <= sptr + 8'd1;
      else if (send_new) sptr <= nxt + 8'd1;
      if (ack_ok) begin
        base <= ack_to;
        if (ack_to != base) idle_frames <= '0;
      end
      if (slot) begin
        if (base == nxt) idle_frames <= '0;
        else if (!(ack_ok && ack_to != base)) idle_frames <= idle_frames + 1'b1;
      end
      if (nak_in || (slot && int'(idle_frames) >= TIMEOUT)) begin
        if (base != nxt) stat_replay <= 1'b1;
        sptr        <= ack_ok ? ack_to : base;
        idle_frames <= '0;
      end
    end
  end
endmodule
