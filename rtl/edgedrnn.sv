// edgedrnn -- EdgeDRNN accelerator top level: a DeltaGRU inference engine for
// batch-1, low-latency recurrent networks with weights in external DRAM.
//
// Blocks and their wiring follow the paper's architecture figure:
//   x(t) --> delta unit --Delta--> K D-FIFOs --> K PEs <--> OBUF --> h(t)
//                 |pcol                 ^ weights (W-FIFO, lane k to PE k)
//                 v                     |
//               CTRL --instructions--> AXI Datamover (outside) --W-->
//   CFG (AXI-Lite) --> CTRL, delta unit; CTRL --s--> all PEs.
// Only columns of the weight matrix whose delta element is non-zero are
// fetched, so DRAM traffic and MAC work shrink with the temporal sparsity of
// the input and hidden state, while every fetch stays a long burst.
//
// Interfaces (all AXI-style valid/ready, one clock, active-low async reset):
//   s_axil_*  configuration (register map in cfg_axil)
//   s_x_*     x(t): ceil(N/4) beats of four INT16 Q8.8 elements per time step
//   m_h_*     h(t) of the last layer: M/4 beats, TLAST on the last
//   m_cmd_*   72-bit AXI Datamover read commands (one per non-zero column)
//   s_w_*     64-bit weight beats returned by the Datamover, K INT8 weights each
// K = 8 follows the paper (64-bit DRAM port / 8-bit weights). MAX_M and MAX_L
// default to the largest network the paper evaluates (2 layers of 768);
// MAX_IN and the FIFO depths are this design's choices.
module edgedrnn
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_M       = 768,
  parameter int unsigned MAX_IN      = 768,
  parameter int unsigned MAX_L       = 2,
  parameter int unsigned DFIFO_DEPTH = 64,
  parameter int unsigned WFIFO_DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI-Lite configuration
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [31:0]       s_axil_wdata,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [7:0]        s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  // x(t) in
  input  logic              s_x_tvalid,
  output logic              s_x_tready,
  input  logic [63:0]       s_x_tdata,
  // h(t) out
  output logic              m_h_tvalid,
  input  logic              m_h_tready,
  output logic [63:0]       m_h_tdata,
  output logic              m_h_tlast,
  // Datamover
  output logic              m_cmd_tvalid,
  input  logic              m_cmd_tready,
  output logic [CMD_W-1:0]  m_cmd_tdata,
  input  logic              s_w_tvalid,
  output logic              s_w_tready,
  input  logic [BW_DRAM-1:0] s_w_tdata
);
  localparam int unsigned OAW = $clog2(MAX_L * MAX_M / K);

  // configuration
  logic             cfg_enable, cfg_init, busy;
  logic [1:0]       cfg_layers;
  logic [IDX_W-1:0] cfg_n, cfg_m;
  act_t             cfg_theta;
  logic [31:0]      cfg_wbase, ts_count;

  cfg_axil u_cfg (
    .clk, .rst_n,
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr, .s_axil_wvalid, .s_axil_wready,
    .s_axil_wdata, .s_axil_bvalid, .s_axil_bready, .s_axil_bresp, .s_axil_arvalid,
    .s_axil_arready, .s_axil_araddr, .s_axil_rvalid, .s_axil_rready, .s_axil_rdata,
    .s_axil_rresp,
    .cfg_enable, .cfg_init, .cfg_layers, .cfg_n, .cfg_m, .cfg_theta, .cfg_wbase,
    .st_busy(busy), .st_steps(ts_count[30:0]));

  // delta unit <-> ctrl
  logic             du_clear, du_start, du_layer, du_first, du_done, du_busy;
  logic [IDX_W-1:0] du_n_in, du_m;
  logic             dv_valid;
  act_t             dv_delta;
  logic [IDX_W-1:0] dv_pcol;
  col_t             dv_ctype;
  logic             pcol_af;
  logic             du_rd_en, du_rd_layer;
  logic [IDX_W-1:0] du_rd_idx;
  act_t             du_rd_data;

  // FIFOs
  logic [K-1:0]     df_empty, df_full, df_af;
  act_t             df_dout [K];
  logic             df_pop, wf_pop, wf_empty, wf_full, wf_af;
  logic [BW_DRAM-1:0] wf_dout;

  // PEs / OBUF
  pe_ctrl_t         s;
  logic [K-1:0]     h_we;
  logic [OAW-1:0]   h_addr [K];
  act_t             h_out [K];
  act_t             ob_pe_rdata [K];
  logic             ob_clear, ob_clr_done, ob_rd_en, out_start, out_layer, out_done;
  logic [OAW-1:0]   ob_rd_addr;
  logic [IDX_W-1:0] out_m;

  delta_unit #(.MAX_L(MAX_L), .MAX_IN(MAX_IN), .MAX_M(MAX_M)) u_du (
    .clk, .rst_n, .theta(cfg_theta),
    .clear(du_clear), .start(du_start), .st_layer(du_layer), .st_n_in(du_n_in),
    .st_m(du_m), .st_first(du_first), .busy(du_busy), .done(du_done),
    .s_x_tvalid, .s_x_tready, .s_x_tdata,
    .obuf_rd_en(du_rd_en), .obuf_rd_layer(du_rd_layer), .obuf_rd_idx(du_rd_idx),
    .obuf_rd_data(du_rd_data),
    .out_ready(!df_af[0] && !pcol_af),
    .dv_valid, .dv_delta, .dv_pcol, .dv_ctype);

  for (genvar k = 0; k < K; k++) begin : g_lane
    logic [$clog2(DFIFO_DEPTH+1)-1:0] df_cnt;
    sync_fifo #(.WIDTH(BW_A), .DEPTH(DFIFO_DEPTH)) u_dfifo (
      .clk, .rst_n, .push(dv_valid), .din(dv_delta), .pop(df_pop),
      .dout(df_dout[k]), .empty(df_empty[k]), .full(df_full[k]),
      .almost_full(df_af[k]), .count(df_cnt));

    pe #(.MAX_M(MAX_M), .MAX_L(MAX_L)) u_pe (
      .clk, .rst_n, .s, .delta(df_dout[k]), .w(wgt_t'(wf_dout[BW_W*k +: BW_W])),
      .h_prev(ob_pe_rdata[k]), .h_we(h_we[k]), .h_addr(h_addr[k]), .h_out(h_out[k]));
  end

  logic [$clog2(WFIFO_DEPTH+1)-1:0] wf_cnt;
  assign s_w_tready = !wf_full;
  sync_fifo #(.WIDTH(BW_DRAM), .DEPTH(WFIFO_DEPTH)) u_wfifo (
    .clk, .rst_n, .push(s_w_tvalid && s_w_tready), .din(s_w_tdata), .pop(wf_pop),
    .dout(wf_dout), .empty(wf_empty), .full(wf_full), .almost_full(wf_af), .count(wf_cnt));

  ctrl #(.MAX_M(MAX_M), .MAX_L(MAX_L)) u_ctrl (
    .clk, .rst_n,
    .cfg_enable, .cfg_init, .cfg_layers, .cfg_n, .cfg_m, .cfg_wbase,
    .busy, .ts_count,
    .x_valid(s_x_tvalid),
    .du_clear, .du_start, .du_layer, .du_n_in, .du_m, .du_first, .du_done,
    .dv_valid, .dv_pcol, .dv_ctype, .pcol_almost_full(pcol_af),
    .m_cmd_tvalid, .m_cmd_tready, .m_cmd_tdata,
    .wf_empty, .wf_pop, .df_empty(df_empty[0]), .df_pop,
    .s,
    .obuf_clear(ob_clear), .obuf_clr_done(ob_clr_done), .obuf_rd_en(ob_rd_en),
    .obuf_rd_addr(ob_rd_addr), .out_start, .out_layer, .out_m, .out_done);

  obuf #(.MAX_M(MAX_M), .MAX_L(MAX_L)) u_obuf (
    .clk, .rst_n, .clear(ob_clear), .clr_done(ob_clr_done),
    .du_rd_en, .du_rd_layer, .du_rd_idx, .du_rd_data,
    .pe_rd_en(ob_rd_en), .pe_rd_addr(ob_rd_addr), .pe_rd_data(ob_pe_rdata),
    .pe_we(h_we), .pe_wr_addr(h_addr[0]), .pe_wdata(h_out),
    .out_start, .out_layer, .out_m, .out_done,
    .m_h_tvalid, .m_h_tready, .m_h_tdata, .m_h_tlast);

  // all lanes move in lockstep
  a_lanes_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                                     (df_empty == {K{df_empty[0]}}) && (h_we == {K{h_we[0]}}));
endmodule
