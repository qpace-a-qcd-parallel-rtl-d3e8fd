// torus_rx -- receive side of one torus-network link.
//
// Packets arrive as XGMII words (START, header, 32 payload words, CRC-32, TERMINATE).
// The receiver checks each data packet and answers it through the local transmitter
// with a 4-byte command packet:
//   * ACK  when the checksum is right, the sequence number is the one expected and a
//          receive-buffer slot was free: the packet is kept and the expected number
//          advances;
//   * NACK when the checksum is wrong or no slot was free: the sender then goes back
//          and sends this packet and all that followed it again;
//   * nothing when a correct packet carries another sequence number (a packet sent
//          after one that was refused; it will be sent again).
// Commands for our own transmitter (ACK/NACK), which come as frames of their own or as
// one word between a data packet's checksum and TERMINATE, are handed to the local TX.
//
// The receive buffer holds RX_SLOTS packets of 128 bytes. Up to 8 virtual channels (VC)
// share the link. For each VC the receiver keeps the order of arrival (a queue of slot
// numbers) and a queue of credits written by the local processor. A credit gives a
// local offset and a number of packets. A packet can leave the buffer only when its VC
// has a credit, so packets of a VC without credit wait while packets of other VCs
// overtake them (the reordering the paper asks for). A round-robin arbiter over the
// VCs (the second arbitration level; the first, over links, is in the inbound-write
// controller) picks the next packet, and the packet is written to
//     base[vc] + 128 * remote_offset + local_offset
// as eight 128-bit beats (o_*, valid/ready). When the last packet a credit covers has
// been written, the credit is retired and notify_valid pulses with its VC.
//
// From the paper: ACK/NACK command packets, retransmission on NACK, receive buffer,
// credits with a local offset, 8 VCs, second-level arbitration and reordering by
// credit, address = base + remote offset + local offset, notification on completion.
// This design's choices: buffer size, credit queue depth, credit format (offset plus
// packet count), go-back-N sequence rule, round-robin order, commands inside data
// frames.
module torus_rx
  import qpace_pkg::*;
#(
  parameter int RX_SLOTS     = 8,
  parameter int CREDIT_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  xgmii_t              xg_rx,
  // command packets to send through the local transmitter
  output logic                cmd_valid,
  output ptype_e              cmd_type,
  output logic [SEQ_W-1:0]    cmd_seq,
  // command packets received, for the local transmitter
  output logic                ack_valid,
  output ptype_e              ack_type,
  output logic [SEQ_W-1:0]    ack_seq,
  // credits from the processor
  input  logic                cr_valid,
  output logic                cr_ready,
  input  logic [2:0]          cr_vc,
  input  credit_t             cr_credit,
  // base address per VC (configuration registers)
  input  logic [ADDR_W-1:0]   base [NUM_VC],
  // packet writes towards the processor
  output logic                o_valid,
  input  logic                o_ready,
  output logic [ADDR_W-1:0]   o_addr,
  output logic [BEAT_W-1:0]   o_data,
  output logic                o_last,
  output logic                notify_valid,
  output logic [2:0]          notify_vc,
  // status
  output logic [15:0]         stat_rx_ok,
  output logic [15:0]         stat_crc_err,
  output logic [15:0]         stat_nobuf,
  output logic [15:0]         stat_overtake
);
  localparam int SLOT_W = $clog2(RX_SLOTS);

  // ---------------- receive buffer ----------------
  logic [BEAT_W-1:0]  mem   [RX_SLOTS * PKT_BEATS];
  logic [ROFF_W-1:0]  sroff [RX_SLOTS];
  logic [RX_SLOTS-1:0] busy;

  // ---------------- parser ----------------
  typedef enum logic [2:0] {P_IDLE, P_HDR, P_PAY, P_CRC, P_TERM, P_CMDEND} pstate_e;
  pstate_e           ps;
  hdr_t              hdr;
  logic [31:0]       crc;
  logic              crc_ok;
  logic [4:0]        widx;
  logic              pig;     // a command word has followed the checksum
  logic [31:0]       wbuf [3];
  logic              have_slot;
  logic [SLOT_W-1:0] slot;
  logic [SEQ_W-1:0]  expected;

  logic is_start, is_term, is_data;
  assign is_start = xg_rx.ctl[0] && (xg_rx.d[7:0] == XG_START);
  assign is_term  = xg_rx.ctl[0] && (xg_rx.d[7:0] == XG_TERM);
  assign is_data  = (xg_rx.ctl == 4'h0);

  // first free slot
  logic              free_any;
  logic [SLOT_W-1:0] free_idx;
  always_comb begin
    free_any = 1'b0;
    free_idx = '0;
    for (int i = RX_SLOTS - 1; i >= 0; i--) begin
      if (!busy[i]) begin
        free_any = 1'b1;
        free_idx = SLOT_W'(i);
      end
    end
  end

  // decision at the end of a data packet
  logic accept;
  assign accept = (ps == P_TERM) && is_term && crc_ok && (hdr.seq == expected) && have_slot;

  // ---------------- per-VC queues ----------------
  logic [NUM_VC-1:0] vq_empty, vq_full, cf_empty, cf_full;
  logic [NUM_VC-1:0] vq_pop, cf_pop;
  logic [SLOT_W-1:0] vq_head [NUM_VC];
  credit_t           cf_head [NUM_VC];

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    logic [$clog2(RX_SLOTS+1)-1:0]     vq_count;
    logic [$clog2(CREDIT_DEPTH+1)-1:0] cf_count;
    sync_fifo #(.WIDTH(SLOT_W), .DEPTH(RX_SLOTS)) u_vq (
      .clk, .rst_n,
      .wr_en(accept && hdr.vc == 3'(v)), .wdata(slot),
      .rd_en(vq_pop[v]), .rdata(vq_head[v]),
      .full(vq_full[v]), .empty(vq_empty[v]), .count(vq_count)
    );
    sync_fifo #(.WIDTH($bits(credit_t)), .DEPTH(CREDIT_DEPTH)) u_cf (
      .clk, .rst_n,
      .wr_en(cr_valid && cr_ready && cr_vc == 3'(v)), .wdata(cr_credit),
      .rd_en(cf_pop[v]), .rdata(cf_head[v]),
      .full(cf_full[v]), .empty(cf_empty[v]), .count(cf_count)
    );
  end

  assign cr_ready = !cf_full[cr_vc];

  // ---------------- parser sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= P_IDLE; hdr <= '0; crc <= CRC_INIT; crc_ok <= 1'b0; widx <= '0; pig <= 1'b0;
      have_slot <= 1'b0; slot <= '0; expected <= '0;
      cmd_valid <= 1'b0; cmd_type <= PT_ACK; cmd_seq <= '0;
      ack_valid <= 1'b0; ack_type <= PT_ACK; ack_seq <= '0;
      stat_rx_ok <= '0; stat_crc_err <= '0; stat_nobuf <= '0;
      for (int i = 0; i < 3; i++) wbuf[i] <= '0;
    end else begin
      cmd_valid <= 1'b0;
      ack_valid <= 1'b0;
      unique case (ps)
        P_IDLE: if (is_start) ps <= P_HDR;
        P_HDR: begin
          if (!is_data) ps <= P_IDLE;
          else begin
            hdr       <= hdr_t'(xg_rx.d);
            crc       <= crc32_word(CRC_INIT, xg_rx.d);
            widx      <= '0;
            have_slot <= free_any;
            slot      <= free_idx;
            ps        <= (xg_rx.d[31:30] == PT_DATA) ? P_PAY : P_CMDEND;
          end
        end
        P_PAY: begin
          if (!is_data) ps <= P_IDLE;      // broken frame: no answer, sender times out
          else begin
            crc  <= crc32_word(crc, xg_rx.d);
            widx <= widx + 1'b1;
            if (widx[1:0] != 2'd3) wbuf[widx[1:0]] <= xg_rx.d;
            if (widx == 5'd31) ps <= P_CRC;
          end
        end
        P_CRC: begin
          crc_ok <= is_data && (xg_rx.d == crc);
          ps     <= P_TERM;
        end
        P_TERM: begin
          ps  <= is_start ? P_HDR : P_IDLE;
          pig <= 1'b0;
          if (is_data && !pig) begin
            // command word carried between the checksum and TERMINATE of a data packet
            ps  <= P_TERM;
            pig <= 1'b1;
            if (xg_rx.d[31:30] == PT_ACK || xg_rx.d[31:30] == PT_NACK) begin
              ack_valid <= 1'b1;
              ack_type  <= ptype_e'(xg_rx.d[31:30]);
              ack_seq   <= xg_rx.d[26:22];
            end
          end else if (!(is_term && crc_ok)) begin
            cmd_valid    <= 1'b1; cmd_type <= PT_NACK; cmd_seq <= expected;
            stat_crc_err <= stat_crc_err + 1'b1;
          end else if (hdr.seq != expected) begin
            // packet after a refused one: dropped, it will come again
          end else if (!have_slot) begin
            cmd_valid  <= 1'b1; cmd_type <= PT_NACK; cmd_seq <= expected;
            stat_nobuf <= stat_nobuf + 1'b1;
          end else begin
            cmd_valid  <= 1'b1; cmd_type <= PT_ACK; cmd_seq <= expected;
            expected   <= expected + 1'b1;
            stat_rx_ok <= stat_rx_ok + 1'b1;
          end
        end
        P_CMDEND: begin
          ps <= P_IDLE;
          if (is_term) begin
            ack_valid <= 1'b1; ack_type <= hdr.ptype; ack_seq <= hdr.seq;
          end
        end
        default: ps <= P_IDLE;
      endcase
    end
  end

  // payload into the reserved slot, one 128-bit beat per four words
  always_ff @(posedge clk) begin
    if (ps == P_PAY && is_data && have_slot && widx[1:0] == 2'd3)
      mem[{slot, widx[4:2]}] <= {xg_rx.d, wbuf[2], wbuf[1], wbuf[0]};
    if (accept) sroff[slot] <= hdr.roff;
  end

  // ---------------- delivery: VC arbitration, credits, address ----------------
  logic [NUM_VC-1:0] eligible;
  for (genvar v = 0; v < NUM_VC; v++) begin : g_elig
    assign eligible[v] = !vq_empty[v] && !cf_empty[v];
  end

  logic [2:0] rr, pick;
  logic       pick_ok;
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = NUM_VC - 1; k >= 0; k--) begin
      if (eligible[3'(rr + 3'(k))]) begin
        pick_ok = 1'b1;
        pick    = 3'(rr + 3'(k));
      end
    end
  end

  logic              dbusy;
  logic [2:0]        dvc;
  logic [SLOT_W-1:0] dslot;
  logic [2:0]        dbeat;
  logic [ADDR_W-1:0] daddr;
  logic [NPKT_W-1:0] used [NUM_VC];

  assign o_valid = dbusy;
  assign o_addr  = daddr + ADDR_W'({dbeat, 4'b0000});
  assign o_data  = mem[{dslot, dbeat}];
  assign o_last  = (dbeat == 3'd7);

  logic dfin;
  assign dfin = dbusy && o_ready && o_last;
  logic credit_done;
  assign credit_done = dfin && (used[dvc] + 1'b1 == cf_head[dvc].npkts);

  always_comb begin
    vq_pop = '0;
    cf_pop = '0;
    if (dfin)        vq_pop[dvc] = 1'b1;
    if (credit_done) cf_pop[dvc] = 1'b1;
  end

  logic [NUM_VC-1:0] waiting_no_credit;
  for (genvar v = 0; v < NUM_VC; v++) begin : g_wait
    assign waiting_no_credit[v] = !vq_empty[v] && cf_empty[v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dbusy <= 1'b0; dvc <= '0; dslot <= '0; dbeat <= '0; daddr <= '0; rr <= '0;
      busy <= '0; notify_valid <= 1'b0; notify_vc <= '0; stat_overtake <= '0;
      for (int v = 0; v < NUM_VC; v++) used[v] <= '0;
    end else begin
      notify_valid <= 1'b0;
      if (accept) busy[slot] <= 1'b1;
      if (!dbusy) begin
        if (pick_ok) begin
          dbusy <= 1'b1;
          dvc   <= pick;
          dslot <= vq_head[pick];
          dbeat <= '0;
          daddr <= base[pick] + (ADDR_W'(sroff[vq_head[pick]]) << 7)
                              + ADDR_W'(cf_head[pick].loff);
          rr    <= pick + 3'd1;
          if ((waiting_no_credit & ~(NUM_VC'(1) << pick)) != '0)
            stat_overtake <= stat_overtake + 1'b1;
        end
      end else if (o_ready) begin
        dbeat <= dbeat + 1'b1;
        if (o_last) begin
          dbusy       <= 1'b0;
          busy[dslot] <= 1'b0;
          if (credit_done) begin
            used[dvc]    <= '0;
            notify_valid <= 1'b1;
            notify_vc    <= dvc;
          end else begin
            used[dvc] <= used[dvc] + 1'b1;
          end
        end
      end
    end
  end

  a_credit_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    cr_valid && cr_ready |-> cr_credit.npkts != '0);
  a_hold_beat: assert property (@(posedge clk) disable iff (!rst_n)
    o_valid && !o_ready |=> o_valid && $stable(o_addr) && $stable(o_data));
endmodule
