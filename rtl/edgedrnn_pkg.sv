// edgedrnn_pkg -- types and constants shared by the EdgeDRNN blocks.
//
// Number formats (the paper states INT16 activations and INT8 weights; the
// binary points are this design's choice): activations are Q8.8 (1.0 = 0x0100,
// so a threshold of 0x40 is 0.25 and 0x80 is 0.5), weights are Q1.7, products and
// accumulators are 32-bit Q.15 (AFRAC + WFRAC fractional bits).
// The PE control word `s` (pe_ctrl_t) is driven by CTRL to all PEs in lockstep.
package edgedrnn_pkg;

  localparam int unsigned K        = 8;   // PEs = BW_DRAM / BW_W = 64 / 8
  localparam int unsigned BW_DRAM  = 64;
  localparam int unsigned BW_W     = 8;
  localparam int unsigned BW_A     = 16;
  localparam int unsigned BW_ACC   = 32;
  localparam int unsigned AFRAC    = 8;
  localparam int unsigned WFRAC    = 7;
  localparam int unsigned CMD_W    = 72;  // datamover command width
  localparam int unsigned IDX_W    = 11;  // column / element index width

  typedef logic signed [BW_A-1:0]   act_t;
  typedef logic signed [BW_W-1:0]   wgt_t;
  typedef logic signed [BW_ACC-1:0] acc_t;

  // Kind of a weight column: input (x or h of the layer below), recurrent h, bias.
  typedef enum logic [1:0] {COL_IN = 2'd0, COL_HID = 2'd1, COL_BIAS = 2'd2} col_t;

  // Accumulator slots of one neuron.
  typedef enum logic [1:0] {SL_R = 2'd0, SL_U = 2'd1, SL_CX = 2'd2, SL_CH = 2'd3} slot_t;

  // PE operation selected by s.
  typedef enum logic [1:0] {OP_NOP = 2'd0, OP_MAC = 2'd1, OP_ACT = 2'd2} pe_op_t;

  typedef struct packed {
    pe_op_t      op;
    logic [2:0]  step;     // activation micro-step 0..5
    slot_t       slot;     // MAC: target accumulator slot
    logic        zero;     // MAC: ADD0 takes 0 instead of BRAM data (initialisation)
    logic        layer;    // layer index (MAX_L = 2)
    logic [9:0]  row;      // local neuron index inside the PE
  } pe_ctrl_t;

  localparam int unsigned ACT_STEPS = 6;

  // AXI Datamover command (72 bits): {rsvd[3:0], tag[3:0], saddr[31:0], drr, eof,
  // dsa[5:0], type, btt[22:0]}.
  typedef struct packed {
    logic [3:0]  rsvd;
    logic [3:0]  tag;
    logic [31:0] saddr;
    logic        drr;
    logic        eof;
    logic [5:0]  dsa;
    logic        incr;
    logic [22:0] btt;
  } dm_cmd_t;

  // Saturate a wider signed value to 16 bits.
  function automatic act_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return act_t'(v[15:0]);
  endfunction

  // Accumulator (Q.15) to activation (Q8.8), arithmetic shift then saturate.
  function automatic act_t acc2act(input acc_t a);
    return sat16(40'(a >>> WFRAC));
  endfunction

endpackage
