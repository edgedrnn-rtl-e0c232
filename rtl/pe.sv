// pe -- EdgeDRNN processing element.
//
// Follows the PE of the paper: one 16-bit multiplier (MUL) whose two operands
// are multiplexed, a 32-bit adder (ADD0) whose second input selects accumulation
// memory data or 0, the accumulation memory, the nonlinear unit (NLU) and a
// 16-bit adder (ADD1) that produces h(t) for the output buffer. All PEs receive
// the same control word `s` from CTRL and run in lockstep; PE k owns neurons
// j = K*row + k of every layer.
//
// Matrix-vector phase (s.op = OP_MAC), one weight per cycle, two-stage pipeline:
//   cycle 0: read accumulator word {layer,row}; register delta and weight.
//   cycle 1: acc[slot] <= (s.zero ? 0 : acc[slot]) + delta * w.
// A bias-column beat (s.zero) into slot CX also clears slot CH. Each accumulator
// word holds four Q.15 sums: r, u, c from the input, c from the hidden state
// (kept apart because r multiplies only W_hc h). Keeping four slots, the
// pipeline, and Q1.7 weights are this design's choices.
//
// Activation phase (s.op = OP_ACT), six micro-steps per row driven by CTRL.
// The accumulator read for step 0 is addressed straight from s; every step is
// then carried out in the cycle after s shows it (s.step is registered), and
// its result is registered at the end of that cycle. CTRL reads h(t-1) from
// OBUF when it shows step 1, so it arrives with the step-1 work:
//   0: read accumulator word
//   1: r = sigmoid(A_r), latch word and h(t-1)
//   2: u = sigmoid(A_u), m = r * A_ch                        (MUL)
//   3: c = tanh(A_cx + m)                                    (ADD0, NLU)
//   4: d = h(t-1) - c                                        (ADD1)
//   5: h = c + u * d                                         (MUL, ADD1)
// h_we/h_addr/h_out are registered: they rise 7 cycles after s shows step 0.
// This is Eq. 1 of the GRU rewritten as h = c + u (h(t-1) - c); the step order
// is this design's own.
module pe
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_M = 768,
  parameter int unsigned MAX_L = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  pe_ctrl_t  s,
  input  act_t      delta,     // head of this PE's D-FIFO
  input  wgt_t      w,         // this PE's lane of the W-FIFO head
  input  act_t      h_prev,    // h(t-1) from OBUF, valid at step 1
  output logic      h_we,
  output logic [$clog2(MAX_L*MAX_M/K)-1:0] h_addr,
  output act_t      h_out
);
  localparam int unsigned MB    = MAX_M / K;
  localparam int unsigned DEPTH = MAX_L * MB;
  localparam int unsigned AW    = $clog2(DEPTH);

  // accumulation memory: four slots per word, one write enable per slot
  acc_t mem_r [DEPTH];
  acc_t mem_u [DEPTH];
  acc_t mem_cx[DEPTH];
  acc_t mem_ch[DEPTH];
  acc_t rd_r, rd_u, rd_cx, rd_ch;

  logic [AW-1:0] raddr;
  assign raddr = AW'(s.layer * MB + s.row);

  always_ff @(posedge clk) begin
    rd_r  <= mem_r [raddr];
    rd_u  <= mem_u [raddr];
    rd_cx <= mem_cx[raddr];
    rd_ch <= mem_ch[raddr];
  end

  // ---------------- MAC pipeline registers ----------------
  logic          mac_v, mac_zero;
  slot_t         mac_slot;
  logic [AW-1:0] mac_addr;
  act_t          mac_d;
  wgt_t          mac_w;

  // ---------------- activation registers ----------------
  logic [2:0]    act_step;     // step seen in the previous cycle (valid when act_v)
  logic          act_v;
  logic [AW-1:0] act_addr;
  acc_t          a_u, a_cx, a_ch;
  act_t          hp_q, r_q, u_q, c_q, d_q;
  acc_t          m_q;

  // ---------------- shared arithmetic ----------------
  act_t                mul_a, mul_b;
  logic signed [31:0]  prod;
  acc_t                add0_a, add0_b, add0_y;
  act_t                add1_a, add1_b;
  logic                add1_sub;
  act_t                add1_y;
  act_t                nlu_x, nlu_y;
  logic                nlu_tanh;
  acc_t                mac_old;

  // operand multiplexers (select from s, registered one cycle)
  always_comb begin
    // MUL
    mul_a = mac_d;
    mul_b = act_t'(mac_w);
    if (act_v && act_step == 3'd2) begin
      mul_a = r_q;
      mul_b = acc2act(a_ch);
    end else if (act_v && act_step == 3'd5) begin
      mul_a = u_q;
      mul_b = d_q;
    end
    prod = mul_a * mul_b;

    // ADD0: BRAM data or 0 plus product; or A_cx + r*A_ch (Q.16 -> Q.15)
    unique case (mac_slot)
      SL_R:    mac_old = rd_r;
      SL_U:    mac_old = rd_u;
      SL_CX:   mac_old = rd_cx;
      default: mac_old = rd_ch;
    endcase
    if (act_v && act_step == 3'd3) begin
      add0_a = a_cx;
      add0_b = m_q >>> 1;
    end else begin
      add0_a = mac_zero ? '0 : mac_old;
      add0_b = prod;
    end
    add0_y = add0_a + add0_b;

    // ADD1: h(t-1) - c, or c + u*d (Q.16 -> Q8.8)
    if (act_v && act_step == 3'd4) begin
      add1_a = hp_q; add1_b = c_q; add1_sub = 1'b1;
    end else begin
      add1_a = c_q;  add1_b = sat16(40'(prod >>> AFRAC)); add1_sub = 1'b0;
    end
    add1_y = add1_sub ? sat16(40'(add1_a) - 40'(add1_b)) : sat16(40'(add1_a) + 40'(add1_b));

    // NLU input select
    nlu_tanh = 1'b0;
    nlu_x    = acc2act(rd_r);
    if (act_v && act_step == 3'd2) nlu_x = acc2act(a_u);
    if (act_v && act_step == 3'd3) begin
      nlu_x    = acc2act(add0_y);
      nlu_tanh = 1'b1;
    end
  end

  nlu u_nlu (.x(nlu_x), .sel_tanh(nlu_tanh), .y(nlu_y));

  // MAC write-back
  always_ff @(posedge clk) begin
    if (mac_v) begin
      unique case (mac_slot)
        SL_R:  mem_r [mac_addr] <= add0_y;
        SL_U:  mem_u [mac_addr] <= add0_y;
        SL_CX: mem_cx[mac_addr] <= add0_y;
        SL_CH: mem_ch[mac_addr] <= add0_y;
      endcase
      if (mac_zero && mac_slot == SL_CX) mem_ch[mac_addr] <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_v    <= 1'b0;
      mac_zero <= 1'b0;
      mac_slot <= SL_R;
      mac_addr <= '0;
      mac_d    <= '0;
      mac_w    <= '0;
      act_v    <= 1'b0;
      act_step <= '0;
      act_addr <= '0;
      h_we     <= 1'b0;
      h_addr   <= '0;
      h_out    <= '0;
      {a_u, a_cx, a_ch, m_q} <= '0;
      {hp_q, r_q, u_q, c_q, d_q} <= '0;
    end else begin
      // stage 0 -> stage 1
      mac_v    <= (s.op == OP_MAC);
      mac_zero <= s.zero;
      mac_slot <= s.slot;
      mac_addr <= raddr;
      mac_d    <= delta;
      mac_w    <= w;
      act_v    <= (s.op == OP_ACT);
      act_step <= s.step;
      act_addr <= raddr;
      h_we     <= 1'b0;
      if (act_v) begin
        unique case (act_step)
          3'd1: begin
            a_u  <= rd_u; a_cx <= rd_cx; a_ch <= rd_ch;
            hp_q <= h_prev;
            r_q  <= nlu_y;
          end
          3'd2: begin
            u_q <= nlu_y;
            m_q <= prod;
          end
          3'd3: c_q <= nlu_y;
          3'd4: d_q <= add1_y;
          3'd5: begin
            h_out  <= add1_y;
            h_we   <= 1'b1;
            h_addr <= act_addr;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
