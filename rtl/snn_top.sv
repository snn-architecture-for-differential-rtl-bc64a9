// snn_top: the evaluated network, 784 inputs -> 1000 hidden -> 10 outputs.
//
// Two neuron_layer instances are chained: the 1000 output trains of the
// hidden layer are wired straight into the 1000 synaptic buffers of the output
// layer, so spikes travel between neurons over fixed wires with no addressing
// (paper Sec. II-A). Both layers run at the same time, each at its own pace;
// the buffers and overflow words keep them in order. A spike_classifier counts
// the output layer's positive spikes and reports the most active neuron, which
// is the network's class decision (paper Sec. III). Sizes, beta = 0.5, 6-bit
// weights and a single positive threshold of 1.0 follow the paper; the dt
// width, weight fraction bits, buffer depth and the loading port are this
// design's choice.
//
// Interface: in_* carry the 784 input trains (valid/ready per train). Weights
// are written one per cycle: wr_layer selects hidden (0) or output (1) layer,
// wr_neuron and wr_syn select the weight. The output trains leave on out_*
// (the consumer must take them for the network to keep running); counts,
// class_idx and class_valid come from the classifier, cleared by clear_counts.
// evt_* pulse once per processed event in each layer, stall_* show a layer
// waiting for an input word.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned N_IN        = 784,
  parameter int unsigned N_HID       = 1000,
  parameter int unsigned N_OUT       = 10,
  parameter int unsigned DT_W        = DEF_DT_W,
  parameter int unsigned W_W         = DEF_W_W,
  parameter int unsigned W_FRAC      = DEF_W_FRAC,
  parameter int unsigned DECAY_SHIFT = DEF_DECAY_SHIFT,
  parameter bit          USE_LOW     = 1'b0,
  parameter int unsigned BUF_DEPTH   = 64,
  parameter int unsigned CNT_W       = 16,
  localparam int unsigned NW         = $clog2(((N_HID > N_OUT) ? N_HID : N_OUT) + 1),
  localparam int unsigned SW         = $clog2(((N_IN > N_HID) ? N_IN : N_HID) + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [DT_W:0]                 in_word  [N_IN],
  input  logic [N_IN-1:0]               in_valid,
  output logic [N_IN-1:0]               in_ready,
  input  logic                          wr_en,
  input  logic                          wr_layer,
  input  logic [NW-1:0]                 wr_neuron,
  input  logic [SW-1:0]                 wr_syn,
  input  logic signed [W_W-1:0]         wr_data,
  output logic [DT_W:0]                 out_word [N_OUT],
  output logic [N_OUT-1:0]              out_valid,
  input  logic [N_OUT-1:0]              out_ready,
  input  logic                          clear_counts,
  output logic [CNT_W-1:0]              counts [N_OUT],
  output logic [$clog2(N_OUT+1)-1:0]    class_idx,
  output logic                          class_valid,
  output logic                          evt_hid,
  output logic                          evt_out,
  output logic                          stall_hid,
  output logic                          stall_out
);
  logic [DT_W:0]    hid_word [N_HID];
  logic [N_HID-1:0] hid_valid, hid_ready;
  layer_state_t     st_hid, st_out;

  neuron_layer #(
    .N_IN(N_IN), .N_OUT(N_HID), .DT_W(DT_W), .W_W(W_W), .W_FRAC(W_FRAC),
    .DECAY_SHIFT(DECAY_SHIFT), .USE_LOW(USE_LOW), .BUF_DEPTH(BUF_DEPTH)
  ) u_hidden (
    .clk, .rst_n,
    .in_word, .in_valid, .in_ready,
    .wr_en(wr_en && !wr_layer),
    .wr_neuron(($clog2(N_HID+1))'(wr_neuron)),
    .wr_syn(($clog2(N_IN+1))'(wr_syn)), .wr_data,
    .out_word(hid_word), .out_valid(hid_valid), .out_ready(hid_ready),
    .evt(evt_hid), .stall(stall_hid), .state(st_hid)
  );

  neuron_layer #(
    .N_IN(N_HID), .N_OUT(N_OUT), .DT_W(DT_W), .W_W(W_W), .W_FRAC(W_FRAC),
    .DECAY_SHIFT(DECAY_SHIFT), .USE_LOW(USE_LOW), .BUF_DEPTH(BUF_DEPTH)
  ) u_output (
    .clk, .rst_n,
    .in_word(hid_word), .in_valid(hid_valid), .in_ready(hid_ready),
    .wr_en(wr_en && wr_layer),
    .wr_neuron(($clog2(N_OUT+1))'(wr_neuron)),
    .wr_syn(($clog2(N_HID+1))'(wr_syn)), .wr_data,
    .out_word, .out_valid, .out_ready,
    .evt(evt_out), .stall(stall_out), .state(st_out)
  );

  spike_classifier #(.N_CLASS(N_OUT), .DT_W(DT_W), .CNT_W(CNT_W)) u_class (
    .clk, .rst_n, .clear(clear_counts),
    .word(out_word), .take(out_valid & out_ready),
    .count(counts), .class_idx, .class_valid
  );

endmodule
