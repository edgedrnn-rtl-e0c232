// cfg_axil -- EdgeDRNN configuration registers (CFG) behind an AXI4-Lite slave.
//
// The host CPU writes the network size, the delta threshold and the weight base
// address here, as in the paper; the register map and the control bits are
// this design's choice:
//   0x00 CTRL    bit0 enable (R/W), bit1 init (write 1: clear the network state,
//                reads 0)
//   0x04 STATUS  bit0 busy, bits 31:1 number of finished time steps (read-only)
//   0x08 LAYERS  number of layers, 1..MAX_L
//   0x0C N       input size of layer 0
//   0x10 M       hidden size (a multiple of 8)
//   0x14 THETA   delta threshold, Q8.8 (e.g. 0x40 = 0.25)
//   0x18 WBASE   byte address of the first weight column in DRAM
// Write: the address and data channels are taken together when both are valid
// and no response is pending; BRESP is OKAY. Read: one cycle after AR, RRESP
// OKAY. WSTRB is ignored (full-word writes). Unknown addresses read 0.
module cfg_axil
  import edgedrnn_pkg::*;
#(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [31:0]       s_axil_wdata,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  // configuration out
  output logic              cfg_enable,
  output logic              cfg_init,
  output logic [1:0]        cfg_layers,
  output logic [IDX_W-1:0]  cfg_n,
  output logic [IDX_W-1:0]  cfg_m,
  output act_t              cfg_theta,
  output logic [31:0]       cfg_wbase,
  // status in
  input  logic              st_busy,
  input  logic [30:0]       st_steps
);
  logic wr;
  assign wr             = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr;
  assign s_axil_wready  = wr;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_enable    <= 1'b0;
      cfg_init      <= 1'b0;
      cfg_layers    <= 2'd1;
      cfg_n         <= '0;
      cfg_m         <= '0;
      cfg_theta     <= '0;
      cfg_wbase     <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      cfg_init <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr[7:2])
          6'h00: begin
            cfg_enable <= s_axil_wdata[0];
            cfg_init   <= s_axil_wdata[1];
          end
          6'h02: cfg_layers <= s_axil_wdata[1:0];
          6'h03: cfg_n      <= s_axil_wdata[IDX_W-1:0];
          6'h04: cfg_m      <= s_axil_wdata[IDX_W-1:0];
          6'h05: cfg_theta  <= s_axil_wdata[15:0];
          6'h06: cfg_wbase  <= s_axil_wdata;
          default: ;
        endcase
      end
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr[7:2])
          6'h00:   s_axil_rdata <= {31'd0, cfg_enable};
          6'h01:   s_axil_rdata <= {st_steps, st_busy};
          6'h02:   s_axil_rdata <= {30'd0, cfg_layers};
          6'h03:   s_axil_rdata <= 32'(cfg_n);
          6'h04:   s_axil_rdata <= 32'(cfg_m);
          6'h05:   s_axil_rdata <= 32'(cfg_theta);
          6'h06:   s_axil_rdata <= cfg_wbase;
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // AXI rule: a response stays valid until taken
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
