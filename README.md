# EdgeDRNN in SystemVerilog

EdgeDRNN is an accelerator for gated recurrent unit (GRU) networks. It runs
batch-1 inference at low latency, with all weights held in external DRAM. Such
networks are limited by memory bandwidth: every time step reads the whole weight
matrix once. EdgeDRNN cuts that traffic with the *delta network* idea. The
accelerator works on the change of each input and hidden-state element since the
value it last sent. A change smaller than a threshold Θ is treated as zero. A zero
delta means the whole weight column it would multiply is never fetched. The
columns that are fetched are long, contiguous DRAM bursts, so the memory port
stays efficient. Eight 8-bit multipliers fed by one 64-bit memory port peak at
2 GOp/s at 125 MHz. On a two-layer, 768-unit speech recogniser with Θ = 0.25, the
published design reaches a mean *effective* throughput of about 20 GOp/s, about
ten times that peak, and under 0.6 ms per frame.

This repository holds synthesizable SystemVerilog for the accelerator core
described in the EdgeDRNN paper (Gao, Rios-Navarro, Chen, Delbruck, Liu): the delta
unit, the FIFOs, the controller, eight processing elements, the output buffer and
the configuration registers. Bit-exact self-checking testbenches come with it.
The paper gives the block structure, the PE datapath, K = 8, the word widths and
the performance model. Number formats, the DRAM layout, the register map, the
handshakes and the PE micro-sequence are not in the paper; they are this design's
choices, and each is listed below.

## 1. The arithmetic

A GRU layer with input x (N elements) and state h (M elements) computes

    r = σ(W_ir x + W_hr h' + b_r)        h' = h(t-1)
    u = σ(W_iu x + W_hu h' + b_u)
    c = tanh(W_ic x + r ⊙ (W_hc h') + b_c)
    h = (1 - u) ⊙ c + u ⊙ h'  =  c + u ⊙ (h' - c)

In delta form, each matrix-vector product becomes a running sum. The sum starts
at the bias, and each time step adds W·Δ for the non-zero deltas only. The
hardware keeps **four 32-bit sums per neuron**:

| slot | accumulates | why it is separate |
|------|-------------|--------------------|
| R    | W_ir Δx + W_hr Δh + b_r | |
| U    | W_iu Δx + W_hu Δh + b_u | |
| CX   | W_ic Δx + b_c | r multiplies only the recurrent part |
| CH   | W_hc Δh | |

**Delta rule** (delta unit): for element i, `d = sat16(cur - prev)`. The element
fires if `d != 0` and `|d| >= Θ`. When it fires, `prev += d` and the column is
fetched. When it does not fire, `prev` is left unchanged. Small changes therefore
build up until they cross Θ, and the sums never drift from what the transmitted
deltas imply. Exact zeros never fire, even at Θ = 0. This is the "natural
sparsity" that gives the paper's roughly 2× speed-up at Θ = 0.

**Bias as a column.** The biases are stored as one extra weight column per layer.
On the first time step after an initialisation, that column is sent with delta
1.0. The PE adds its product to 0 instead of to the stored sum (the paper's
"0" input of the ADD0 multiplexer). This loads R, U and CX with the biases and
clears CH.

**Number formats** (the paper says INT16 activations and INT8 weights; the binary
points are this design's choice):

* activations and Θ are Q8.8, so 1.0 = 0x0100. Θ = 0x40 is 0.25 and 0x80 is 0.5,
  which matches the hex thresholds in the paper's figures;
* weights are Q1.7, in the range [-1, 1);
* products and sums are 32-bit Q.15 and wrap on overflow;
* `acc2act(a) = sat16(a >>> 7)` turns a sum into a Q8.8 pre-activation.

**Nonlinear unit.** There are two 256-entry tables (sigmoid, tanh) over [-8, 8) in
steps of 1/16. The index is `clamp(x >>> 4, -128, 127) + 128`. Entry i holds
`round(256·f((i-128)/16))`. The tables are computed at elaboration time from
`$exp`; no data file is needed.

**Neuron update in the PE**, one multiplier and two adders:

    r  = σ(acc2act(R))
    u  = σ(acc2act(U))
    m  = r · acc2act(CH)                     (Q.16)
    c  = tanh(acc2act(CX + (m >>> 1)))       (ADD0, 32 bit)
    d  = sat16(h' - c)                       (ADD1)
    h  = sat16(c + sat16((u · d) >>> 8))     (MUL, ADD1)

## 2. One time step

```
 x(t) ──► delta unit ──Δ──► D-FIFO ×8 ──► PE ×8 ◄──► OBUF ──► h(t)
              │ pcol                         ▲ lane k of each 64-bit beat
              ▼                              │
            CTRL ──instruction──► Datamover ─┴─► W-FIFO
   CFG (AXI-Lite) ──► CTRL, delta unit         CTRL ──s──► all PEs
```

CTRL runs each layer in three phases.

1. **Matrix-vector.** CTRL starts the delta unit. The delta unit walks the layer
   input, then the recurrent state, one element per cycle: x(t) from the input
   stream for layer 0, h(t) of layer 0 from OBUF for layer 1. Each surviving
   delta is pushed into all eight D-FIFOs, and its column pointer `pcol` goes to
   CTRL. CTRL turns each pcol into one Datamover read of the whole column, which
   is 3M/8 beats of 64 bits. Each returning beat carries eight weights, and PE k
   takes byte k. CTRL issues one `OP_MAC` control word per beat. The word is
   issued when the W-FIFO has a beat, the D-FIFOs have the matching delta, and a
   column is in flight. Beat b of a column goes to gate b/(M/8) and local row
   b mod (M/8). The delta is popped with the column's last beat. The delta unit
   can run ahead of the weights by up to the FIFO depth; it stalls on the
   FIFOs' almost-full flags.
2. **Activation.** After the last column has drained, CTRL steps all PEs through
   six micro-steps per local row. PE k updates neurons 8·row + k and writes h(t)
   back to OBUF.
3. **Output.** After the last layer, OBUF streams h(t) out.

Neuron j always lives in PE j mod 8, in the bank of OBUF with the same number.
All PEs receive the same control word and run in lockstep.

### Cycle counts

| phase | cycles (this RTL) | paper's model (Eq. 5) |
|-------|-------------------|----------------------|
| weight streaming | 3M/8 per fetched column, if the Datamover delivers one beat per cycle | 3M/(Kf) per non-zero column |
| delta scan | n_in + M per layer (x part: 5 cycles per 4 elements), overlapped with streaming | not modelled |
| activation | 6·M/8 + 3 per layer (2 pipeline-drain cycles, 6 per row, 1 wait) | 3M/(Kf) |
| output | M/4 + M/8 | not modelled |

The peak is 8 MACs per cycle, which is 2 GOp/s at 125 MHz, as in the paper. The
activation phase takes twice the paper's estimate. Each neuron here uses the
single multiplier twice and the NLU three times, and the six steps are not
overlapped across rows. With M = 768 that costs 288 extra cycles per layer,
against tens of thousands of streaming cycles per time step.

## 3. Weights in DRAM and the instruction

Layer 0 starts at `WBASE`. Layer 1 follows directly after it.
Each layer is a sequence of columns: the n_in input columns, then the M recurrent
columns, then the bias column. Column c of layer l starts at

    base(l) + c · 3·(M/8)·8      base(1) = WBASE + (N + M + 1) · 3·(M/8)·8

Inside a column, beat b holds rows 8·(b mod M/8) … +7 of gate b div (M/8), in the
order r, u, c. The lowest-addressed byte is row 8·… + 0 and goes to PE 0. For
2L-768H this totals 5.40 MB, which matches the parameter count the paper gives
for that network.

The instruction is the 72-bit Xilinx AXI Datamover command: `btt` [22:0] is the
byte count, bit 23 is INCR, bit 30 is EOF and `saddr` is bits [63:32]. The paper
does not give a format; this one follows the Datamover IP named in it.

## 4. Blocks

| file | block |
|------|-------|
| `rtl/edgedrnn_pkg.sv` | widths, Q formats, `pe_ctrl_t` (the control word s), `dm_cmd_t`, saturation helpers |
| `rtl/edgedrnn.sv` | top level: wires everything below |
| `rtl/delta_unit.sv` | previous-state memories, delta rule, bias column, x(t) unpacking |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO: D-FIFOs (16 bit × 64), W-FIFO (64 bit × 512), CTRL's column queues |
| `rtl/ctrl.sv` | phase sequencer, instruction generator (one multiply for the column address), beat sequencer |
| `rtl/pe.sv` | accumulation memory (4 slots × L·M/8 words), MUL, ADD0, ADD1, operand multiplexers |
| `rtl/nlu.sv` | sigmoid / tanh tables |
| `rtl/obuf.sv` | 8-bank h memory, delta-unit read port, h(t) streamer, clear sweep |
| `rtl/cfg_axil.sv` | AXI4-Lite register file |

The AXI DMA, the AXI Datamover, the ARM processing system and the DDR3 memory of
the paper's MiniZed system are outside this RTL. Their connections are the top's
ports. `tb/datamover_model.sv` is a behavioural stand-in for the Datamover and
DRAM.

## 5. Using the top level

Parameters: `MAX_M` = 768 and `MAX_L` = 2 (the largest network evaluated in the
paper), `MAX_IN` = 768 (the widest layer input; layer 1's input is M wide),
`DFIFO_DEPTH` = 64, `WFIFO_DEPTH` = 512. K = 8 is fixed in the package, because
the DRAM word is 64 bits and weights are 8 bits. The network size is set at run
time, up to these limits. M must be a multiple of 8.

Ports (single clock, active-low asynchronous reset, AXI valid/ready handshakes):

| port group | width | use |
|-----------|-------|-----|
| `s_axil_*` | 32-bit data, 8-bit address | configuration |
| `s_x_*` | 64 | x(t): ceil(N/4) beats, element 4b+e in bits 16e+15:16e; a partly filled last beat is padded |
| `m_h_*` | 64 | h(t) of the last layer: M/4 beats, same packing, TLAST on the last beat |
| `m_cmd_*` | 72 | Datamover commands |
| `s_w_*` | 64 | weight beats from the Datamover |

Register map (byte addresses):

| addr | name | meaning |
|------|------|---------|
| 0x00 | CTRL | bit 0 enable; writing 1 to bit 1 clears the state (previous states, h, first-step flag) |
| 0x04 | STATUS | bit 0 busy; bits 31:1 number of finished time steps |
| 0x08 | LAYERS | 1 or 2 |
| 0x0C | N | input size of layer 0 |
| 0x10 | M | hidden size |
| 0x14 | THETA | Q8.8 threshold; may be changed between time steps |
| 0x18 | WBASE | byte address of layer 0's first column |

Start-up sequence: write the sizes, THETA and WBASE; write 2 to CTRL; poll STATUS
until it reads not busy; write 1 to CTRL. Each x(t) offered on `s_x_*` then
starts a time step. The matching h(t) appears on `m_h_*`.

## 6. Departures from the paper and open points

* **Burst length.** The paper's sparse matrix-vector figure labels the burst
  length M/K. Its Eq. 5 charges 3M/K cycles per non-zero column. Here, one
  instruction fetches the stacked [W_r; W_u; W_c] column, which is 3M/8 beats.
  This is consistent with Eq. 5; the figure's M is read as the height of the
  stacked matrix.
* **Activation phase.** It takes 6M/8 cycles, not 3M/8 (see section 2).
* **Threshold comparison.** The paper says both "exceed Θ" and "less than Θ is
  set to zero". This RTL keeps |d| ≥ Θ and drops exact zeros.
* **Previous-state update.** The paper says the memory "records x(t-1) and
  h(t-2)". This RTL stores the last *transmitted* value, which is the
  delta-network rule. With Θ = 0 the two are the same.
* **Not built:** the 1-, 2-, 4- and 16-bit weight modes the paper mentions. Only
  the 8-bit mode, which the paper uses for all its results, is built.
* The x(t) input takes four elements per five cycles: a bubble follows each beat.
* FIFO depths, `MAX_IN`, the reset values and the clear sweeps (the delta unit
  needs MAX_L·max(MAX_IN, MAX_M) cycles) are all this design's choices.

## 7. Verification

Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=F`.

| testbench | what it does |
|-----------|--------------|
| `tb_sync_fifo` | random push/pop against a queue; flags and count |
| `tb_nlu` | all 65 536 inputs of both functions against a real-number model |
| `tb_pe` | bias, input and hidden columns, then activation of every row of both layers against the GRU model; h_we exactly 7 cycles after step 0 |
| `tb_delta_unit` | six steps of both layers with back-pressure against a delta-rule model; one element per cycle |
| `tb_obuf` | clear, both ports, stream order, TLAST, back-pressure, cycle count |
| `tb_ctrl` | instructions (addresses, byte counts), MAC words, activation order, layer order, counters |
| `tb_cfg_axil` | every register, init pulse, status, held BVALID |
| `tb_edgedrnn` | whole accelerator, 2 layers, N = 40, M = 64, six steps, random stalls everywhere |
| `tb_edgedrnn_full` | whole accelerator with default parameters on 2L-768H (N = 40), three steps |
| `tb_edgedrnn_1l` | whole accelerator with default parameters on 1L-256H (N = 40), LAYERS = 1, five steps with a re-initialisation |

The three system tests share `tb/edgedrnn_tb_body.sv`. It holds a bit-exact
DeltaGRU model with the delta rule, the bias column, the Q formats and the
tables. On every time step it checks:

* every h(t) element and TLAST;
* every PE accumulator of the last layer;
* that the number of Datamover instructions equals the number of non-zero
  columns;
* the number of MAC beats (columns × 3M/8);
* the number of activation cycles (6M/8 per layer).

It also counts each mechanism and fails if one never occurs:

* threshold skips and exact-zero skips;
* bias loads;
* delta-unit stalls on full FIFOs;
* PE waits for weights;
* output back-pressure;
* second-layer runs (two-layer configurations only);
* a re-initialisation;
* a threshold change from 0x40 to 0.

`tb/datamover_model.sv` serves the weights. Each weight byte is a hash of its
address, mapped to [-20, 20].

Running a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_edgedrnn \
        -y rtl -y tb +libext+.sv -Irtl -Itb \
        rtl/edgedrnn_pkg.sv tb/edgedrnn_tb_pkg.sv tb/tb_edgedrnn.sv -o sim
    ./obj_dir/sim

The full-size test takes a few seconds of wall-clock time. In it, a
2L-768H time step with about 800 fetched columns takes about 300 000 cycles,
with 20 % random stalls on the weight stream.

## 8. Networks from the paper

All six networks the paper evaluates (1 or 2 layers of 256, 512 or 768 GRU units,
40 filter-bank inputs, INT16/INT8) fit the default parameters. L ≤ 2,
M ≤ MAX_M = 768, N = 40 ≤ MAX_IN, and every M is a multiple of 8. Their weights
(0.23 M to 5.40 M bytes including biases) live in DRAM, so on-chip storage does
not depend on the network beyond these limits.
