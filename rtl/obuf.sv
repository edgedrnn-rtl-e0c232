// obuf -- EdgeDRNN output buffer.
//
// Holds h of every layer as K banks (bank k holds neurons j = K*row + k, the
// neurons of PE k). Three users, never active at the same time (CTRL orders the
// phases):
//   * the PEs read h(t-1) and write h(t) of one row in all banks at once
//     (pe_rd_* / pe_we, shared address {layer, row});
//   * the delta unit reads one element by global index (du_rd_*);
//   * the output streamer sends h(t) of a layer as 64-bit AXI-Stream beats of
//     four INT16 elements (element 0 in bits 15:0), TLAST on the last beat.
// All reads have one cycle of latency. `clear` writes zeros everywhere
// (h_{-1} = 0) in a sweep of MAX_L*MAX_M/K cycles; `clr_done` pulses at its end.
// The paper shows only the buffer and its connections (PEs both ways, h(t-1)
// to the delta unit, h(t) out); the banking, stream format and clear sweep are
// this design's choices. The streamer reads one row per K/4+1 cycles.
module obuf
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_M = 768,
  parameter int unsigned MAX_L = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             clr_done,
  // delta unit read
  input  logic             du_rd_en,
  input  logic             du_rd_layer,
  input  logic [IDX_W-1:0] du_rd_idx,
  output act_t             du_rd_data,
  // PE access
  input  logic             pe_rd_en,
  input  logic [$clog2(MAX_L*MAX_M/K)-1:0] pe_rd_addr,
  output act_t             pe_rd_data [K],
  input  logic [K-1:0]     pe_we,
  input  logic [$clog2(MAX_L*MAX_M/K)-1:0] pe_wr_addr,
  input  act_t             pe_wdata [K],
  // output stream
  input  logic             out_start,
  input  logic             out_layer,
  input  logic [IDX_W-1:0] out_m,
  output logic             out_done,
  output logic             m_h_tvalid,
  input  logic             m_h_tready,
  output logic [63:0]      m_h_tdata,
  output logic             m_h_tlast
);
  localparam int unsigned MB    = MAX_M / K;
  localparam int unsigned DEPTH = MAX_L * MB;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned KB    = $clog2(K);
  localparam int unsigned BPR   = K / 4;          // beats per row
  localparam int unsigned QW    = (BPR > 1) ? $clog2(BPR) : 1;

  act_t rdata [K];

  typedef enum logic [1:0] {O_IDLE, O_CLEAR, O_READ, O_SEND} ostate_t;
  ostate_t          ost;
  logic [AW-1:0]    clr_addr;
  logic             olayer;
  logic [IDX_W-1:0] orow, orows;
  logic [QW-1:0]    obeat;
  logic [KB-1:0]    du_bank_q;

  // read address per bank
  logic [AW-1:0] du_addr, st_addr, raddr;
  always_comb begin
    du_addr = AW'(du_rd_layer * MB + (du_rd_idx >> KB));
    st_addr = AW'(olayer * MB + orow);
    raddr   = du_rd_en ? du_addr : pe_rd_en ? pe_rd_addr : st_addr;
  end

  // one simple-dual-port memory per bank
  for (genvar k = 0; k < K; k++) begin : g_bank
    act_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (ost == O_CLEAR)  mem[clr_addr]   <= '0;
      else if (pe_we[k])   mem[pe_wr_addr] <= pe_wdata[k];
      rdata[k] <= mem[raddr];
    end
  end

  assign pe_rd_data = rdata;
  assign du_rd_data = rdata[du_bank_q];

  always_comb begin
    m_h_tdata = '0;
    for (int e = 0; e < 4; e++)
      m_h_tdata[16*e +: 16] = rdata[obeat * 4 + e];
    m_h_tvalid = (ost == O_SEND);
    m_h_tlast  = (ost == O_SEND) && (orow == orows - 1'b1) && (obeat == QW'(BPR - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ost       <= O_IDLE;
      clr_addr  <= '0;
      olayer    <= 1'b0;
      orow      <= '0;
      orows     <= '0;
      obeat     <= '0;
      du_bank_q <= '0;
      clr_done  <= 1'b0;
      out_done  <= 1'b0;
    end else begin
      clr_done  <= 1'b0;
      out_done  <= 1'b0;
      du_bank_q <= du_rd_idx[KB-1:0];
      unique case (ost)
        O_IDLE: begin
          if (clear) begin
            ost      <= O_CLEAR;
            clr_addr <= '0;
          end else if (out_start) begin
            ost    <= O_READ;
            olayer <= out_layer;
            orow   <= '0;
            orows  <= out_m >> KB;
          end
        end
        O_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == AW'(DEPTH - 1)) begin
            ost      <= O_IDLE;
            clr_done <= 1'b1;
          end
        end
        O_READ: begin
          ost   <= O_SEND;
          obeat <= '0;
        end
        O_SEND: if (m_h_tready) begin
          if (obeat == QW'(BPR - 1)) begin
            obeat <= '0;
            if (orow == orows - 1'b1) begin
              ost      <= O_IDLE;
              out_done <= 1'b1;
            end else begin
              orow <= orow + 1'b1;
              ost  <= O_READ;
            end
          end else begin
            obeat <= obeat + 1'b1;
          end
        end
        default: ost <= O_IDLE;
      endcase
    end
  end

  // the three users of the read port never overlap
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(du_rd_en && pe_rd_en));
  a_no_read_while_streaming: assert property (@(posedge clk) disable iff (!rst_n)
                                 (ost == O_READ) |-> !(du_rd_en || pe_rd_en));
endmodule
