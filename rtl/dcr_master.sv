// dcr_master -- master of the shared Device Control Register (DCR) bus.
//
// The slow devices of the NWP (UARTs, SPI master, global signals, configuration
// registers) and the configuration/status registers of the torus links and Ethernet sit
// on one simple shared bus. Two agents may use it:
//   * the processor, through the processor interface (c_* port: a request is taken when
//     c_valid && c_ready; c_done pulses with c_rdata when it has completed);
//   * the service processor, through a serial peripheral interface (SPI) slave.
// The master serves one request at a time, alternating between the two agents when
// both wait. It drives the request onto the bus (dcr_o.req held) until a device
// acknowledges it or TIMEOUT cycles pass; a timed-out access completes with c_err
// (processor) or read data 0xDEADBEEF (service processor).
//
// SPI frame (mode 0, most significant bit first, chip select low for the frame):
//   bits 0..15   header {we, 5'b0, addr[9:0]} on sp_mosi
//   write:  bits 16..47 write data on sp_mosi; the access starts after bit 47
//   read:   the access starts after bit 15; bits 16..23 are turnaround;
//           bits 24..55 read data on sp_miso
// sp_sclk must be at most clk/8 (it is sampled by clk through synchronisers) so a read
// completes within the 8 turnaround bits.
//
// From the paper: a DCR master reached by the processor and by the service processor
// over SPI, and a simple shared DCR bus. The SPI frame, arbitration and timeout are
// this design's choices.
module dcr_master
  import qpace_pkg::*;
#(
  parameter int TIMEOUT = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor side
  input  logic              c_valid,
  output logic              c_ready,
  input  logic              c_we,
  input  logic [DCR_AW-1:0] c_addr,
  input  logic [31:0]       c_wdata,
  output logic              c_done,
  output logic [31:0]       c_rdata,
  output logic              c_err,
  // service processor SPI (slave side)
  input  logic              sp_sclk,
  input  logic              sp_cs_n,
  input  logic              sp_mosi,
  output logic              sp_miso,
  // DCR bus
  output dcr_req_t          dcr_o,
  input  dcr_rsp_t          dcr_i
);
  // ---------------- SPI slave ----------------
  logic [2:0] sclk_s, cs_s, mosi_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sp_sclk};
      cs_s   <= {cs_s[1:0], sp_cs_n};
      mosi_s <= {mosi_s[1:0], sp_mosi};
    end
  end
  logic sclk_rise, sclk_fall, cs_act;
  assign sclk_rise = sclk_s[1] && !sclk_s[2];
  assign sclk_fall = !sclk_s[1] && sclk_s[2];
  assign cs_act    = !cs_s[1];

  logic [5:0]  bitcnt;
  logic [47:0] sin;
  logic [31:0] sout;
  logic        sp_req, sp_we;
  logic [DCR_AW-1:0] sp_addr;
  logic [31:0] sp_wdata;
  logic        sp_grant_done;
  logic [31:0] sp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt <= '0; sin <= '0; sout <= '0; sp_miso <= 1'b0;
      sp_req <= 1'b0; sp_we <= 1'b0; sp_addr <= '0; sp_wdata <= '0;
    end else begin
      if (sp_grant_done) begin
        sp_req <= 1'b0;
        if (!sp_we) sout <= sp_rdata;
      end
      if (!cs_act) begin
        bitcnt  <= '0;
        sp_miso <= 1'b0;
      end else begin
        if (sclk_rise) begin
          sin    <= {sin[46:0], mosi_s[1]};
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 6'd15 && !sin[14]) begin          // header complete, read
            sp_req  <= 1'b1;
            sp_we   <= 1'b0;
            sp_addr <= {sin[8:0], mosi_s[1]};
            sout    <= '0;
          end
          if (bitcnt == 6'd47 && sin[46]) begin           // write data complete
            sp_req   <= 1'b1;
            sp_we    <= 1'b1;
            sp_addr  <= sin[40:31];
            sp_wdata <= {sin[30:0], mosi_s[1]};
          end
        end
        if (sclk_fall && bitcnt >= 6'd24 && bitcnt < 6'd56) begin
          sp_miso <= sout[31];
          sout    <= {sout[30:0], 1'b0};
        end
      end
    end
  end

  // ---------------- bus sequencer ----------------
  typedef enum logic [1:0] {M_IDLE, M_BUS, M_GAP} mstate_e;
  mstate_e     ms;
  logic        owner_sp, prio_sp;
  logic [$clog2(TIMEOUT+1)-1:0] tcnt;
  logic        take_c, take_sp;
  logic        sp_busy_q;     // the current SPI request is already being served

  assign take_sp = (ms == M_IDLE) && sp_req && !sp_busy_q && (prio_sp || !c_valid);
  assign take_c  = (ms == M_IDLE) && c_valid && !take_sp;
  assign c_ready = take_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms <= M_IDLE; owner_sp <= 1'b0; prio_sp <= 1'b0; tcnt <= '0; dcr_o <= '0;
      c_done <= 1'b0; c_rdata <= '0; c_err <= 1'b0;
      sp_grant_done <= 1'b0; sp_rdata <= '0; sp_busy_q <= 1'b0;
    end else begin
      c_done        <= 1'b0;
      sp_grant_done <= 1'b0;
      if (!sp_req) sp_busy_q <= 1'b0;
      unique case (ms)
        M_IDLE: begin
          if (take_sp) begin
            dcr_o     <= '{req: 1'b1, we: sp_we, addr: sp_addr, wdata: sp_wdata};
            owner_sp  <= 1'b1;
            sp_busy_q <= 1'b1;
            prio_sp   <= 1'b0;
            tcnt      <= '0;
            ms        <= M_BUS;
          end else if (take_c) begin
            dcr_o    <= '{req: 1'b1, we: c_we, addr: c_addr, wdata: c_wdata};
            owner_sp <= 1'b0;
            prio_sp  <= 1'b1;
            tcnt     <= '0;
            ms       <= M_BUS;
          end
        end
        M_BUS: begin
          tcnt <= tcnt + 1'b1;
          if (dcr_i.ack || tcnt == TIMEOUT[$bits(tcnt)-1:0]) begin
            dcr_o.req <= 1'b0;
            ms        <= M_GAP;
            if (owner_sp) begin
              sp_grant_done <= 1'b1;
              sp_rdata      <= dcr_i.ack ? dcr_i.rdata : 32'hDEAD_BEEF;
            end else begin
              c_done  <= 1'b1;
              c_rdata <= dcr_i.ack ? dcr_i.rdata : 32'h0;
              c_err   <= !dcr_i.ack;
            end
          end
        end
        M_GAP: ms <= M_IDLE;       // one idle cycle between accesses
        default: ms <= M_IDLE;
      endcase
    end
  end

  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    dcr_o.req && !dcr_i.ack && ms == M_BUS && tcnt != TIMEOUT[$bits(tcnt)-1:0] |=> dcr_o.req && $stable(dcr_o.addr));
endmodule
