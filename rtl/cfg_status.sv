// cfg_status -- configuration, status and version registers of the NWP.
//
// A small register file on the DCR bus:
//   0  version (read only, the VERSION parameter)
//   1  configuration word, read/write, driven on cfg_o
//   2  status word, read only, sampled from status_i
//   3  scratch register, read/write
//   4  free-running cycle counter, read only
// A request is acknowledged one cycle after it is seen.
// From the paper: the block exists and sits on the DCR bus. Its registers are this
// design's choice.
module cfg_status
  import qpace_pkg::*;
#(
  parameter logic [3:0]  DEV     = DCR_DEV_CFG,
  parameter logic [31:0] VERSION = 32'h0001_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  dcr_req_t    dcr_i,
  output dcr_rsp_t    dcr_o,
  output logic [31:0] cfg_o,
  input  logic [31:0] status_i
);
  logic [31:0] scratch, cycles;
  logic        sel;
  logic [5:0]  ra;
  assign sel = dcr_i.req && (dcr_i.addr[9:6] == DEV) && !dcr_o.ack;
  assign ra  = dcr_i.addr[5:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0; cfg_o <= '0; scratch <= '0; cycles <= '0;
    end else begin
      cycles <= cycles + 1'b1;
      dcr_o  <= '0;
      if (sel) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra == 6'd1) cfg_o   <= dcr_i.wdata;
          if (ra == 6'd3) scratch <= dcr_i.wdata;
        end else begin
          unique case (ra)
            6'd0:    dcr_o.rdata <= VERSION;
            6'd1:    dcr_o.rdata <= cfg_o;
            6'd2:    dcr_o.rdata <= status_i;
            6'd3:    dcr_o.rdata <= scratch;
            6'd4:    dcr_o.rdata <= cycles;
            default: dcr_o.rdata <= '0;
          endcase
        end
      end
    end
  end
endmodule
