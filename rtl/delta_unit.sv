// delta_unit -- EdgeDRNN delta unit (DU).
//
// For one layer per `start`, the DU walks the delta vector of the layer input
// (x(t), or h(t) of the layer below) and then of the recurrent state h(t-1),
// one element per cycle, as the paper describes. For element i it reads the
// previous state from its own memory, forms delta = cur - prev (saturated to
// INT16) and keeps it only if delta != 0 and |delta| >= theta. A kept element is
// pushed to all D-FIFOs (dv_delta) together with its column pointer pcol and
// column kind, and the previous-state memory is updated to prev + delta. Skipped
// elements leave the memory alone, so small changes add up until they cross the
// threshold (the delta-network rule). On the first time step after `clear` the
// DU first emits the bias column (pcol = n_in + m, delta = 1.0): the bias is
// stored as an extra weight column, so this loads M_0 = b into the PEs.
//
// Pipeline: stage 0 issues the memory reads (previous state and, when needed,
// OBUF), stage 1 compares and pushes. Issue stops while `out_ready` is low
// (the FIFOs' almost-full flags), which leaves room for the element in flight.
// x(t) arrives as 64-bit AXI-Stream beats of four INT16 elements, element 0 in
// bits 15:0; a beat is taken only when the previous one is used up, so the x
// part runs at four elements per five cycles. `done` pulses once the last
// element has left stage 1. `clear` zeroes both memories in a sweep (busy high).
// The stream packing, the prev+delta update and the clear sweep are this
// design's choices; the threshold rule follows the paper.
module delta_unit
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_L  = 2,
  parameter int unsigned MAX_IN = 768,
  parameter int unsigned MAX_M  = 768
) (
  input  logic             clk,
  input  logic             rst_n,
  input  act_t             theta,
  // control from CTRL
  input  logic             clear,
  input  logic             start,
  input  logic             st_layer,
  input  logic [IDX_W-1:0] st_n_in,
  input  logic [IDX_W-1:0] st_m,
  input  logic             st_first,
  output logic             busy,
  output logic             done,
  // x(t) stream
  input  logic             s_x_tvalid,
  output logic             s_x_tready,
  input  logic [63:0]      s_x_tdata,
  // OBUF read port (1-cycle latency)
  output logic             obuf_rd_en,
  output logic             obuf_rd_layer,
  output logic [IDX_W-1:0] obuf_rd_idx,
  input  act_t             obuf_rd_data,
  // non-zero delta output to D-FIFOs and CTRL
  input  logic             out_ready,
  output logic             dv_valid,
  output act_t             dv_delta,
  output logic [IDX_W-1:0] dv_pcol,
  output col_t             dv_ctype
);
  localparam int unsigned DIN  = MAX_L * MAX_IN;
  localparam int unsigned DHID = MAX_L * MAX_M;
  localparam int unsigned AIN  = $clog2(DIN);
  localparam int unsigned AHID = $clog2(DHID);
  localparam int unsigned DCLR = (DIN > DHID) ? DIN : DHID;
  localparam int unsigned ACLR = $clog2(DCLR);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_BIAS, S_IN, S_HID, S_DRAIN} state_t;
  state_t state;

  act_t pin_mem  [DIN];
  act_t phid_mem [DHID];

  logic             layer, src_x;
  logic [IDX_W-1:0] n_in, m, idx;
  logic [ACLR-1:0]  clr_addr;

  // x beat buffer
  logic        xb_v;
  logic [63:0] xb;
  logic [1:0]  xb_e;

  // stage 1
  logic             s1_v, s1_srcx;
  col_t             s1_kind;
  logic [IDX_W-1:0] s1_idx;
  logic [AIN-1:0]   s1_ain;
  logic [AHID-1:0]  s1_ahid;
  act_t             s1_x, s1_pin, s1_phid;

  // ---------------- stage 0 ----------------
  logic issue, last_idx;
  logic [AIN-1:0]  ain;
  logic [AHID-1:0] ahid;
  always_comb begin
    issue = 1'b0;
    unique case (state)
      S_BIAS:  issue = out_ready;
      S_IN:    issue = out_ready && (!src_x || xb_v);
      S_HID:   issue = out_ready;
      default: issue = 1'b0;
    endcase
    last_idx = (state == S_IN)  ? (idx == n_in - 1'b1) :
               (state == S_HID) ? (idx == m - 1'b1) : 1'b1;
    ain  = AIN'(layer * MAX_IN + idx);
    ahid = AHID'(layer * MAX_M + idx);
    obuf_rd_en    = issue && ((state == S_HID) || (state == S_IN && !src_x));
    obuf_rd_layer = (state == S_HID) ? layer : 1'b0;   // layer input: h(t) of layer below
    obuf_rd_idx   = idx;
  end
  assign s_x_tready = (state == S_IN) && src_x && !xb_v;
  assign busy = (state != S_IDLE);

  // ---------------- stage 1 ----------------
  act_t              cur, prev;
  logic signed [16:0] mag;
  logic              fire;
  always_comb begin
    cur  = s1_srcx ? s1_x : obuf_rd_data;
    prev = (s1_kind == COL_HID) ? s1_phid : s1_pin;
    dv_delta = sat16(40'(cur) - 40'(prev));
    dv_ctype = s1_kind;
    dv_pcol  = s1_idx;
    mag  = dv_delta[15] ? -17'(dv_delta) : 17'(dv_delta);
    fire = (dv_delta != 0) && (mag >= 17'(theta));
    if (s1_kind == COL_BIAS) begin
      dv_delta = act_t'(1 << AFRAC);
      fire     = 1'b1;
    end else if (s1_kind == COL_HID) begin
      dv_pcol  = n_in + s1_idx;
    end
    dv_valid = s1_v && fire;
  end

  // memories
  always_ff @(posedge clk) begin
    if (state == S_CLEAR) begin
      if (int'(clr_addr) < DIN)  pin_mem [AIN'(clr_addr)]  <= '0;
      if (int'(clr_addr) < DHID) phid_mem[AHID'(clr_addr)] <= '0;
    end else if (dv_valid && s1_kind == COL_IN) begin
      pin_mem[s1_ain] <= act_t'(prev + dv_delta);
    end else if (dv_valid && s1_kind == COL_HID) begin
      phid_mem[s1_ahid] <= act_t'(prev + dv_delta);
    end
    s1_pin  <= pin_mem[ain];
    s1_phid <= phid_mem[ahid];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      {layer, src_x} <= '0;
      n_in     <= '0;
      m        <= '0;
      idx      <= '0;
      clr_addr <= '0;
      xb_v     <= 1'b0;
      xb       <= '0;
      xb_e     <= '0;
      s1_v     <= 1'b0;
      s1_srcx  <= 1'b0;
      s1_kind  <= COL_IN;
      s1_idx   <= '0;
      s1_ain   <= '0;
      s1_ahid  <= '0;
      s1_x     <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      s1_v <= issue;
      if (issue) begin
        s1_kind <= (state == S_BIAS) ? COL_BIAS : (state == S_HID) ? COL_HID : COL_IN;
        s1_idx  <= (state == S_BIAS) ? (n_in + m) : idx;
        s1_srcx <= (state == S_IN) && src_x;
        s1_ain  <= ain;
        s1_ahid <= ahid;
        s1_x    <= act_t'(xb >> (16 * xb_e));
      end
      if (s_x_tvalid && s_x_tready) begin
        xb_v <= 1'b1;
        xb   <= s_x_tdata;
        xb_e <= '0;
      end
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            state    <= S_CLEAR;
            clr_addr <= '0;
          end else if (start) begin
            layer <= st_layer;
            n_in  <= st_n_in;
            m     <= st_m;
            src_x <= (st_layer == 1'b0);
            idx   <= '0;
            state <= st_first ? S_BIAS : S_IN;
          end
        end
        S_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == ACLR'(DCLR - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_BIAS: if (issue) state <= S_IN;
        S_IN: if (issue) begin
          if (src_x) begin
            xb_e <= xb_e + 1'b1;
            if (xb_e == 2'd3 || last_idx) xb_v <= 1'b0;
          end
          idx <= last_idx ? '0 : idx + 1'b1;
          if (last_idx) state <= S_HID;
        end
        S_HID: if (issue) begin
          idx <= idx + 1'b1;
          if (last_idx) state <= S_DRAIN;
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the x beat is taken only in the input phase of layer 0
  a_x_only_layer0: assert property (@(posedge clk) disable iff (!rst_n)
                                    s_x_tready |-> (layer == 1'b0));
endmodule
