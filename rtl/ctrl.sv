// ctrl -- EdgeDRNN global controller (CTRL).
//
// Runs one time step of an L-layer DeltaGRU network (L = cfg_layers, 1 or 2):
//   for each layer: start the delta unit; while it streams non-zero deltas,
//   turn each column pointer pcol into one AXI Datamover instruction and feed
//   the returning weight beats to the PEs; then run the activation phase; after
//   the last layer, start the output buffer's h(t) stream.
// A time step starts when the accelerator is enabled and x(t) is offered on the
// input stream. `cfg_init` first clears the delta unit's previous states and the
// output buffer, and marks the next time step as the first (bias columns are
// then loaded).
//
// Instructions: one per non-zero column, 72-bit AXI Datamover command with
// start address  base(layer) + pcol * 3*(m/K)*8  and byte count 3*(m/K)*8, i.e.
// the whole column of the stacked [W_r; W_u; W_c] matrix as 3m/K beats of 64
// bits. Layer bases: base(0) = cfg_wbase, base(1) = base(0) + (n+m+1)*3*(m/K)*8.
// The column order (inputs, then hidden, then bias) and this layout are this
// design's choices; the paper gives only "start address of a weight column and
// the burst length".
//
// PE control `s`: in the matrix-vector phase one OP_MAC word per weight beat,
// issued when the W-FIFO, the D-FIFOs and the in-flight column queue all have
// data; beat b of a column goes to gate b/(m/K), row b%(m/K). The D-FIFO entry is
// popped with the last beat of its column. In the activation phase six OP_ACT
// words (steps 0..5) per row, rows 0..m/K-1 back to back, after two cycles that
// let the MAC pipeline drain and before one wait cycle, so the phase takes
// 6m/K + 3 cycles (the paper's estimate uses 3m/K; see README).
module ctrl
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_M = 768,
  parameter int unsigned MAX_L = 2,
  parameter int unsigned PCOL_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             cfg_enable,
  input  logic             cfg_init,
  input  logic [1:0]       cfg_layers,
  input  logic [IDX_W-1:0] cfg_n,
  input  logic [IDX_W-1:0] cfg_m,
  input  logic [31:0]      cfg_wbase,
  output logic             busy,
  output logic [31:0]      ts_count,
  // x(t) offered
  input  logic             x_valid,
  // delta unit
  output logic             du_clear,
  output logic             du_start,
  output logic             du_layer,
  output logic [IDX_W-1:0] du_n_in,
  output logic [IDX_W-1:0] du_m,
  output logic             du_first,
  input  logic             du_done,
  input  logic             dv_valid,
  input  logic [IDX_W-1:0] dv_pcol,
  input  col_t             dv_ctype,
  output logic             pcol_almost_full,
  // datamover instructions
  output logic             m_cmd_tvalid,
  input  logic             m_cmd_tready,
  output logic [CMD_W-1:0] m_cmd_tdata,
  // FIFOs in front of the PEs
  input  logic             wf_empty,
  output logic             wf_pop,
  input  logic             df_empty,
  output logic             df_pop,
  // PEs
  output pe_ctrl_t         s,
  // output buffer
  output logic             obuf_clear,
  input  logic             obuf_clr_done,
  output logic             obuf_rd_en,
  output logic [$clog2(MAX_L*MAX_M/K)-1:0] obuf_rd_addr,
  output logic             out_start,
  output logic             out_layer,
  output logic [IDX_W-1:0] out_m,
  input  logic             out_done
);
  localparam int unsigned MB = MAX_M / K;
  localparam int unsigned AW = $clog2(MAX_L * MB);
  localparam int unsigned KB = $clog2(K);

  typedef enum logic [3:0] {C_IDLE, C_CLEAR, C_LSTART, C_MXV, C_DRAIN, C_ACT, C_AWAIT,
                            C_OUT} cstate_t;
  cstate_t state;

  logic             layer, first, du_fin, clr_du, clr_ob;
  logic [IDX_W-1:0] n_in_l, mb;
  logic [31:0]      lbase, colbytes;
  logic [1:0]       drain;
  logic [IDX_W-1:0] a_row;
  logic [2:0]       a_step;

  // ---------------- pcol queue and instruction issue ----------------
  logic                 pq_empty, pq_full, pq_af, pq_pop;
  logic [IDX_W+1:0]     pq_dout;
  logic                 iq_empty, iq_full, iq_af, iq_pop;
  logic [1:0]           iq_dout;
  logic                 cmd_v;
  dm_cmd_t              cmd_q;
  logic [$clog2(PCOL_DEPTH+1)-1:0] pq_cnt, iq_cnt;

  sync_fifo #(.WIDTH(IDX_W + 2), .DEPTH(PCOL_DEPTH)) u_pcol_q (
    .clk, .rst_n, .push(dv_valid), .din({dv_ctype, dv_pcol}), .pop(pq_pop),
    .dout(pq_dout), .empty(pq_empty), .full(pq_full), .almost_full(pq_af), .count(pq_cnt));

  // column kinds whose instructions are issued and weights not yet consumed
  sync_fifo #(.WIDTH(2), .DEPTH(PCOL_DEPTH)) u_inflight_q (
    .clk, .rst_n, .push(pq_pop), .din(pq_dout[IDX_W +: 2]), .pop(iq_pop),
    .dout(iq_dout), .empty(iq_empty), .full(iq_full), .almost_full(iq_af), .count(iq_cnt));

  assign pcol_almost_full = pq_af;
  assign pq_pop = !pq_empty && !iq_full && (!cmd_v || m_cmd_tready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_v <= 1'b0;
      cmd_q <= '0;
    end else begin
      if (m_cmd_tready) cmd_v <= 1'b0;
      if (pq_pop) begin
        cmd_v       <= 1'b1;
        cmd_q       <= '0;
        cmd_q.saddr <= lbase + 32'(pq_dout[IDX_W-1:0]) * colbytes;   // DSP
        cmd_q.btt   <= 23'(colbytes);
        cmd_q.incr  <= 1'b1;
        cmd_q.eof   <= 1'b1;
      end
    end
  end
  assign m_cmd_tvalid = cmd_v;
  assign m_cmd_tdata  = cmd_q;

  // ---------------- weight beat sequencer ----------------
  logic [IDX_W-1:0] q_row;
  logic [1:0]       q_gate;
  logic             mac_fire, col_last;
  col_t             q_kind;
  always_comb begin
    q_kind   = col_t'(iq_dout);
    mac_fire = !wf_empty && !df_empty && !iq_empty;
    col_last = (q_gate == 2'd2) && (q_row == mb - 1'b1);
    wf_pop   = mac_fire;
    df_pop   = mac_fire && col_last;
    iq_pop   = mac_fire && col_last;

    s = '0;
    s.layer = layer;
    if (mac_fire) begin
      s.op   = OP_MAC;
      s.row  = 10'(q_row);
      s.zero = (q_kind == COL_BIAS);
      unique case (q_gate)
        2'd0:    s.slot = SL_R;
        2'd1:    s.slot = SL_U;
        default: s.slot = (q_kind == COL_HID) ? SL_CH : SL_CX;
      endcase
    end else if (state == C_ACT) begin
      s.op   = OP_ACT;
      s.step = a_step;
      s.row  = 10'(a_row);
    end
    obuf_rd_en   = (state == C_ACT) && (a_step == 3'd1);   // data reaches the PE with step 1
    obuf_rd_addr = AW'(layer * MB + a_row);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_row  <= '0;
      q_gate <= '0;
    end else if (mac_fire) begin
      if (q_row == mb - 1'b1) begin
        q_row  <= '0;
        q_gate <= (q_gate == 2'd2) ? 2'd0 : q_gate + 1'b1;
      end else begin
        q_row <= q_row + 1'b1;
      end
    end
  end

  // ---------------- phase sequencer ----------------
  assign busy      = (state != C_IDLE);
  assign du_layer  = layer;
  assign du_n_in   = n_in_l;
  assign du_m      = cfg_m;
  assign du_first  = first;
  assign out_layer = layer;
  assign out_m     = cfg_m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      layer      <= 1'b0;
      first      <= 1'b1;
      du_fin     <= 1'b0;
      clr_du     <= 1'b0;
      clr_ob     <= 1'b0;
      n_in_l     <= '0;
      mb         <= '0;
      lbase      <= '0;
      colbytes   <= '0;
      drain      <= '0;
      a_row      <= '0;
      a_step     <= '0;
      du_clear   <= 1'b0;
      du_start   <= 1'b0;
      obuf_clear <= 1'b0;
      out_start  <= 1'b0;
      ts_count   <= '0;
    end else begin
      du_clear   <= 1'b0;
      du_start   <= 1'b0;
      obuf_clear <= 1'b0;
      out_start  <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (cfg_init) begin
            state      <= C_CLEAR;
            du_clear   <= 1'b1;
            obuf_clear <= 1'b1;
            clr_du     <= 1'b0;
            clr_ob     <= 1'b0;
          end else if (cfg_enable && x_valid) begin
            layer    <= 1'b0;
            n_in_l   <= cfg_n;
            mb       <= cfg_m >> KB;
            colbytes <= 32'((cfg_m >> KB) * 3 * (BW_DRAM / 8));
            lbase    <= cfg_wbase;
            state    <= C_LSTART;
          end
        end
        C_CLEAR: begin
          if (du_done)       clr_du <= 1'b1;
          if (obuf_clr_done) clr_ob <= 1'b1;
          if ((clr_du || du_done) && (clr_ob || obuf_clr_done)) begin
            first <= 1'b1;
            state <= C_IDLE;
          end
        end
        C_LSTART: begin
          du_start <= 1'b1;
          du_fin   <= 1'b0;
          state    <= C_MXV;
        end
        C_MXV: begin
          if (du_done) du_fin <= 1'b1;
          if (du_fin && pq_empty && !cmd_v && iq_empty) begin
            drain <= 2'd2;
            state <= C_DRAIN;
          end
        end
        C_DRAIN: begin      // let the PE accumulation pipeline empty
          drain <= drain - 1'b1;
          if (drain == 2'd1) begin
            state  <= C_ACT;
            a_row  <= '0;
            a_step <= '0;
          end
        end
        C_ACT: begin
          if (a_step == 3'(ACT_STEPS - 1)) begin
            a_step <= '0;
            if (a_row == mb - 1'b1) state <= C_AWAIT;
            else                    a_row <= a_row + 1'b1;
          end else begin
            a_step <= a_step + 1'b1;
          end
        end
        C_AWAIT: begin      // last h write reaches the output buffer
          if (layer == 1'(cfg_layers - 2'd1)) begin
            out_start <= 1'b1;
            state     <= C_OUT;
          end else begin
            layer  <= 1'b1;
            n_in_l <= cfg_m;
            lbase  <= lbase + 32'(n_in_l + cfg_m + 1'b1) * colbytes;
            state  <= C_LSTART;
          end
        end
        C_OUT: begin
          if (out_done) begin
            first    <= 1'b0;
            ts_count <= ts_count + 1'b1;
            state    <= C_IDLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // weights only arrive for columns that were requested
  a_no_orphan_weight: assert property (@(posedge clk) disable iff (!rst_n)
                                       (state == C_ACT) |-> (wf_empty && iq_empty));
endmodule
