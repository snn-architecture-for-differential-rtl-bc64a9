// neuron_layer: one fully connected layer of the spiking network.
//
// N_IN input spike trains, each arriving as differential-time words, feed
// N_OUT neurons through a weight per (neuron, synapse) pair (paper Fig. 1 and
// 3). Each input has a synaptic buffer (spike_fifo). One common_stage per
// layer rotates the synapse head times to find the next input event and
// broadcasts the rotation steps, the event dt and whether the event holds a
// real spike to all neuron cores; each neuron_core accumulates its own weights
// for the heads at the event time, updates its potential and sends its output
// words. The outputs are the next layer's input trains, so layers chain by
// wiring out_* of one to in_* of the next.
//
// Time inside the spike trains (spike time) is unrelated to the clock: a
// layer spends N_IN+3 clock cycles per input event (plus waits for empty
// buffers and for neurons still sending) regardless of the dt values.
//
// Interface: in_*/out_* are per-train valid/ready handshakes (word taken when
// both are high). Weights are written one at a time through wr_en, wr_neuron,
// wr_syn, wr_data; this loading port is this design's choice, the paper does
// not describe one. Status outputs: evt pulses once per processed input event,
// stall is high while a consumed synapse waits for its next word.
//
// Buffer depth (BUF_DEPTH, own choice; the paper gives none): an event can
// only be picked once every consumed input has a word, and a silent upstream
// neuron sends only one overflow word per OVF time steps. BUF_DEPTH must
// hold all words one upstream neuron can send in that window; if a buffer
// fills while another is empty, this layer and the one feeding it wait on
// each other for good. Nothing detects this.
module neuron_layer
  import snn_pkg::*;
#(
  parameter int unsigned N_IN        = 784,
  parameter int unsigned N_OUT       = 1000,
  parameter int unsigned DT_W        = DEF_DT_W,
  parameter int unsigned W_W         = DEF_W_W,
  parameter int unsigned W_FRAC      = DEF_W_FRAC,
  parameter int unsigned DECAY_SHIFT = DEF_DECAY_SHIFT,
  parameter int          TH_HIGH     = 1 << W_FRAC,
  parameter bit          USE_LOW     = 1'b0,
  parameter int          TH_LOW      = -(1 << W_FRAC),
  parameter int unsigned BUF_DEPTH   = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [DT_W:0]                in_word  [N_IN],
  input  logic [N_IN-1:0]              in_valid,
  output logic [N_IN-1:0]              in_ready,
  input  logic                         wr_en,
  input  logic [$clog2(N_OUT+1)-1:0]   wr_neuron,
  input  logic [$clog2(N_IN+1)-1:0]    wr_syn,
  input  logic signed [W_W-1:0]        wr_data,
  output logic [DT_W:0]                out_word [N_OUT],
  output logic [N_OUT-1:0]             out_valid,
  input  logic [N_OUT-1:0]             out_ready,
  output logic                         evt,
  output logic                         stall,
  output layer_state_t                 state
);
  logic [DT_W:0]     head_word [N_IN];
  logic [N_IN-1:0]   head_valid, pop;
  rot_step_t         step;
  logic [DT_W-1:0]   evt_dt;
  logic              evt_has_spike;
  logic [N_OUT-1:0]  busy;
  logic [DT_W:0]     t_curr, t_last;

  for (genvar i = 0; i < N_IN; i++) begin : g_buf
    spike_fifo #(.W(DT_W+1), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_word(in_word[i]), .in_valid(in_valid[i]), .in_ready(in_ready[i]),
      .head_word(head_word[i]), .head_valid(head_valid[i]), .pop(pop[i])
    );
  end

  common_stage #(.N(N_IN), .DT_W(DT_W)) u_common (
    .clk, .rst_n, .head_word, .head_valid, .pop,
    .step, .evt, .evt_dt, .evt_has_spike, .neurons_busy(|busy),
    .state, .stall, .t_curr, .t_last
  );

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    logic signed [W_W+$clog2(N_IN)+1:0] potential;
    neuron_core #(
      .N_SYN(N_IN), .DT_W(DT_W), .W_W(W_W), .W_FRAC(W_FRAC),
      .DECAY_SHIFT(DECAY_SHIFT), .TH_HIGH(TH_HIGH), .USE_LOW(USE_LOW), .TH_LOW(TH_LOW)
    ) u_neuron (
      .clk, .rst_n,
      .wr_en(wr_en && (wr_neuron == ($clog2(N_OUT+1))'(j))),
      .wr_addr(wr_syn), .wr_data,
      .step, .evt, .evt_dt, .evt_has_spike,
      .out_word(out_word[j]), .out_valid(out_valid[j]), .out_ready(out_ready[j]),
      .busy(busy[j]), .potential
    );
  end

endmodule
