// inbound_write_ctrl -- arbiter between the links and the processor's master interface.
//
// When a link has a packet in its receive buffer and a matching credit, it requests the
// interface towards the processor. This controller grants one requester at a time in
// round-robin order and forwards its eight 128-bit write beats (address, data, last)
// to the master interface. A grant is held until the requester's last beat has been
// accepted, so the beats of one packet are never interleaved with another's.
//
// Timing: a grant is given in the cycle after the interface is free; then one beat per
// cycle while m_ready is high (a packet takes 9 cycles from request to last beat when
// the interface never stalls).
// From the paper: link requests access, an arbiter grants, data are moved with 128-bit
// width. Round-robin and packet-granular grants are this design's choices.
module inbound_write_ctrl
  import qpace_pkg::*;
#(
  parameter int N = NUM_LINKS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        r_valid,
  output logic [N-1:0]        r_ready,
  input  logic [ADDR_W-1:0]   r_addr [N],
  input  logic [BEAT_W-1:0]   r_data [N],
  input  logic [N-1:0]        r_last,
  // master interface (writes into the processor)
  output logic                m_valid,
  input  logic                m_ready,
  output logic [ADDR_W-1:0]   m_addr,
  output logic [BEAT_W-1:0]   m_data,
  output logic                m_last,
  output logic [15:0]         stat_conflicts   // packets finished while another link waited
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          owned;
  logic [IW-1:0] owner, rr, pick;
  logic          pick_ok;

  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int idx;
      idx = (int'(rr) + k) % N;
      if (r_valid[idx]) begin
        pick_ok = 1'b1;
        pick    = IW'(idx);
      end
    end
  end

  logic [N-1:0] others;    // requesters other than the current owner
  always_comb begin
    others        = r_valid;
    others[owner] = 1'b0;
  end

  always_comb begin
    r_ready = '0;
    if (owned) r_ready[owner] = m_ready;
  end
  assign m_valid = owned && r_valid[owner];
  assign m_addr  = r_addr[owner];
  assign m_data  = r_data[owner];
  assign m_last  = r_last[owner];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owned <= 1'b0; owner <= '0; rr <= '0; stat_conflicts <= '0;
    end else if (!owned) begin
      if (pick_ok) begin
        owned <= 1'b1;
        owner <= pick;
        rr    <= (int'(pick) == N - 1) ? '0 : pick + 1'b1;
      end
    end else if (m_valid && m_ready && m_last) begin
      owned <= 1'b0;
      if (others != '0) stat_conflicts <= stat_conflicts + 1'b1;
    end
  end

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(r_ready));
endmodule
