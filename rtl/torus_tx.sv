// torus_tx -- transmit side of one torus-network link.
//
// The processor pushes a message into the link by writing 128-byte packets, as eight
// 128-bit beats, into a 2 kB transmit FIFO (16 packets). Packets are sent as soon as
// they are queued, without further intervention, as XGMII words:
//     START, header, 32 payload words, CRC-32, TERMINATE        (36 cycles)
// The FIFO keeps every packet until the receiver returns an ACK command packet for it
// (go-back-N): three pointers walk the FIFO, wr_ptr (next free slot), send_ptr (next
// packet to send) and ack_ptr (oldest packet not yet acknowledged). A NACK for the
// oldest packet, or no ACK within TIMEOUT cycles, rewinds send_ptr to ack_ptr at the
// next packet boundary, so the packet and all after it are sent again. When all 16
// slots hold packets not yet acknowledged, wr_ready drops and the processor's write
// is held back (back-pressure).
// The same transmitter carries the ACK/NACK commands that the local receiver generates
// for the opposite direction. A command that is waiting when a data packet's checksum
// goes out is placed between checksum and TERMINATE of that packet (one extra cycle);
// otherwise it goes out at the next packet boundary, before any data, as a frame of
// its own (START, command word, TERMINATE: 3 cycles).
//
// Interface: wr_* is the write port from the outbound-write controller, one beat per
// cycle when wr_valid && wr_ready; the VC and remote offset are taken from the last beat
// of a packet. cmd_* carries commands the local receiver wants sent, ack_* the commands
// the local receiver has received. xg_tx is the XGMII output, one word per clock.
//
// From the paper: 2 kB FIFO per link, packet = 4 B header + 128 B payload + 4 B
// checksum, 4 B ACK/NACK command packets, copy kept until ACK, automatic retransmission,
// back-pressure when the FIFO is full, 32-bit XGMII. This design's own choices: the
// go-back-N sequence numbering, the timeout, the header layout, the XGMII framing (and
// carrying commands inside data frames), the
// CRC polynomial and one common clock for the whole NWP.
module torus_tx
  import qpace_pkg::*;
#(
  parameter int FIFO_BYTES = TX_FIFO_BYTES,
  parameter int TIMEOUT    = 2048,   // cycles without ACK before a retransmission
  parameter int CMDQ_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // packet data from the outbound-write controller
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic [BEAT_W-1:0]   wr_data,
  input  logic [2:0]          wr_beat,    // beat index 0..7 within the packet
  input  logic [2:0]          wr_vc,
  input  logic [ROFF_W-1:0]   wr_roff,
  // commands to send for the local receiver
  input  logic                cmd_valid,
  input  ptype_e              cmd_type,
  input  logic [SEQ_W-1:0]    cmd_seq,
  // commands received by the local receiver
  input  logic                ack_valid,
  input  ptype_e              ack_type,
  input  logic [SEQ_W-1:0]    ack_seq,
  // XGMII transmit
  output xgmii_t              xg_tx,
  // status
  output logic [15:0]         stat_sent,       // data packets sent, including repeats
  output logic [15:0]         stat_retx,       // rewinds (NACK or timeout)
  output logic [15:0]         stat_timeouts,
  output logic                busy             // packets in FIFO or commands pending
);
  localparam int SLOTS  = FIFO_BYTES / PKT_BYTES;
  localparam int SLOT_W = $clog2(SLOTS);
  localparam int PTR_W  = SEQ_W;              // pointer doubles as sequence number
  localparam int TMO_W  = $clog2(TIMEOUT + 1);

  initial begin
    assert (SLOTS <= (1 << (SEQ_W - 1)))
      else $error("torus_tx: FIFO holds more packets than the sequence number can tell apart");
  end

  // ---------------- packet storage ----------------
  logic [BEAT_W-1:0] mem  [SLOTS * PKT_BEATS];
  logic [2:0]        mvc  [SLOTS];
  logic [ROFF_W-1:0] mroff[SLOTS];

  logic [PTR_W-1:0] wr_ptr, send_ptr, ack_ptr;
  logic [PTR_W-1:0] hi_ptr;       // one past the newest packet ever sent
  logic [PTR_W-1:0] n_stored;
  assign n_stored = wr_ptr - ack_ptr;
  assign wr_ready = (n_stored != PTR_W'(SLOTS));

  logic wr_fire;
  assign wr_fire = wr_valid && wr_ready;
  logic [SLOT_W-1:0] wslot;
  assign wslot = wr_ptr[SLOT_W-1:0];

  always_ff @(posedge clk) begin
    if (wr_fire) begin
      mem[{wslot, wr_beat}] <= wr_data;
      if (wr_beat == 3'd7) begin
        mvc[wslot]   <= wr_vc;
        mroff[wslot] <= wr_roff;
      end
    end
  end

  // ---------------- command queue ----------------
  logic              cq_empty, cq_full, cq_pop;
  logic [$clog2(CMDQ_DEPTH+1)-1:0] cq_count;
  logic [1:0]         cq_type_raw;
  logic [SEQ_W-1:0]   cq_seq;
  sync_fifo #(.WIDTH(2 + SEQ_W), .DEPTH(CMDQ_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .wr_en (cmd_valid), .wdata({cmd_type, cmd_seq}),
    .rd_en (cq_pop),    .rdata({cq_type_raw, cq_seq}),
    .full  (cq_full),   .empty(cq_empty), .count(cq_count)
  );
  // ---------------- transmit sequencer ----------------
  typedef enum logic [2:0] {S_IDLE, S_CMD, S_HDR, S_PAY, S_CRC, S_PCMD, S_TERM} state_e;
  state_e            state;
  logic [4:0]        widx;             // payload word index 0..31
  logic [PTR_W-1:0]  cur_ptr;          // packet being sent
  logic [31:0]       crc;
  logic [31:0]       cmd_word;
  logic              rewind_pend;
  logic [TMO_W-1:0]  tmo_cnt;

  logic [SLOT_W-1:0] cslot;
  assign cslot = cur_ptr[SLOT_W-1:0];
  logic [BEAT_W-1:0] cur_beat;
  assign cur_beat = mem[{cslot, widx[4:2]}];
  logic [31:0] pay_word;
  assign pay_word = cur_beat[32*widx[1:0] +: 32];

  hdr_t cur_hdr;
  always_comb begin
    cur_hdr       = '0;
    cur_hdr.ptype = PT_DATA;
    cur_hdr.vc    = mvc[cslot];
    cur_hdr.seq   = cur_ptr;
    cur_hdr.roff  = mroff[cslot];
  end

  // commands from the local receiver about our own packets
  logic ack_ok, nack_ok;
  // (only for a packet that has been sent at least once)
  assign ack_ok  = ack_valid && (ack_type == PT_ACK)  && (ack_seq == ack_ptr) && (ack_ptr != hi_ptr);
  assign nack_ok = ack_valid && (ack_type == PT_NACK) && (ack_seq == ack_ptr) && (ack_ptr != hi_ptr);

  logic tmo_fire;
  assign tmo_fire = (send_ptr != ack_ptr) && !rewind_pend && (tmo_cnt == TMO_W'(TIMEOUT));

  assign cq_pop = (state == S_IDLE || state == S_CRC) && !cq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; widx <= '0; cur_ptr <= '0; crc <= CRC_INIT; cmd_word <= '0;
      wr_ptr <= '0; send_ptr <= '0; ack_ptr <= '0; hi_ptr <= '0;
      rewind_pend <= 1'b0; tmo_cnt <= '0;
      xg_tx <= XGMII_IDLE;
      stat_sent <= '0; stat_retx <= '0; stat_timeouts <= '0;
    end else begin
      // write side
      if (wr_fire && wr_beat == 3'd7) wr_ptr <= wr_ptr + 1'b1;

      // acknowledgement side
      if (ack_ok) begin
        ack_ptr <= ack_ptr + 1'b1;
        // after a rewind the acknowledged packet may be next to send again: skip it
        if (send_ptr == ack_ptr) send_ptr <= send_ptr + 1'b1;
      end
      if (nack_ok) rewind_pend <= 1'b1;
      if (tmo_fire) begin
        rewind_pend   <= 1'b1;
        stat_timeouts <= stat_timeouts + 1'b1;
      end
      if (ack_ok || send_ptr == ack_ptr || rewind_pend) tmo_cnt <= '0;
      else if (tmo_cnt != TMO_W'(TIMEOUT))            tmo_cnt <= tmo_cnt + 1'b1;

      unique case (state)
        S_IDLE: begin
          xg_tx <= XGMII_IDLE;
          if (!cq_empty) begin
            cmd_word <= {cq_type_raw, 3'b000, cq_seq, 1'b0, ROFF_W'(0)};
            xg_tx    <= XGMII_START;
            state    <= S_CMD;
          end else if (rewind_pend) begin
            if (!ack_ok) send_ptr <= ack_ptr;
            else         send_ptr <= ack_ptr + 1'b1;
            rewind_pend <= 1'b0;
            stat_retx   <= stat_retx + 1'b1;
          end else if (send_ptr != wr_ptr && !(ack_ok && send_ptr == ack_ptr)) begin
            cur_ptr  <= send_ptr;
            send_ptr <= send_ptr + 1'b1;
            if (send_ptr == hi_ptr) hi_ptr <= hi_ptr + 1'b1;
            xg_tx    <= XGMII_START;
            state    <= S_HDR;
          end
        end
        S_CMD: begin
          xg_tx <= '{ctl: 4'h0, d: cmd_word};
          state <= S_TERM;
        end
        S_HDR: begin
          xg_tx <= '{ctl: 4'h0, d: cur_hdr};
          crc   <= crc32_word(CRC_INIT, cur_hdr);
          widx  <= '0;
          state <= S_PAY;
        end
        S_PAY: begin
          xg_tx <= '{ctl: 4'h0, d: pay_word};
          crc   <= crc32_word(crc, pay_word);
          widx  <= widx + 1'b1;
          if (widx == 5'd31) state <= S_CRC;
        end
        S_CRC: begin
          xg_tx     <= '{ctl: 4'h0, d: crc};
          stat_sent <= stat_sent + 1'b1;
          if (!cq_empty) begin                  // a waiting ACK/NACK rides along
            cmd_word <= {cq_type_raw, 3'b000, cq_seq, 1'b0, ROFF_W'(0)};
            state    <= S_PCMD;
          end else begin
            state    <= S_TERM;
          end
        end
        S_PCMD: begin
          xg_tx <= '{ctl: 4'h0, d: cmd_word};
          state <= S_TERM;
        end
        S_TERM: begin
          xg_tx <= XGMII_TERM;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (wr_ptr != ack_ptr) || !cq_empty || (state != S_IDLE);

  // The command queue is drained at every packet boundary (at most 36 cycles), while
  // the receiver produces at most one command per 36-cycle packet: it cannot overflow.
  a_cmdq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(cmd_valid && cq_full));
  a_beats_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    wr_fire && wr_beat != 3'd7 |=> !wr_fire || wr_beat == $past(wr_beat) + 3'd1);
endmodule
