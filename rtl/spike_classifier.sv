// spike_classifier: picks the output neuron that fired most.
//
// The network's answer is the output neuron with the most output spikes
// (paper Sec. III: one output neuron per digit, the one with the most spikes
// gives the class). The classifier watches the output words of the last layer
// as they are handed over (take[j] high for one cycle per word) and counts,
// per neuron, the positive spike words. Each word is one unit of amplitude, so
// a +0 word after a spike counts as a second spike at the same time. Overflow
// words and negative words are not counted (the evaluated network only fires
// positive spikes; ignoring negative ones is this design's choice).
//
// clear zeroes all counters (for the next input sample). class_idx is the
// index of the largest counter, the lowest index winning a tie, and
// class_valid is high once any spike has been counted. Counters saturate at
// 2**CNT_W-1. The argmax is a combinational compare chain over the N_CLASS
// counters; widths and tie rule are this design's choice.
module spike_classifier #(
  parameter int unsigned N_CLASS = 10,
  parameter int unsigned DT_W    = 8,
  parameter int unsigned CNT_W   = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [DT_W:0]                 word [N_CLASS],
  input  logic [N_CLASS-1:0]            take,
  output logic [CNT_W-1:0]              count [N_CLASS],
  output logic [$clog2(N_CLASS+1)-1:0]  class_idx,
  output logic                          class_valid
);
  localparam int unsigned IW = $clog2(N_CLASS+1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_CLASS; j++) count[j] <= '0;
    end else begin
      for (int j = 0; j < N_CLASS; j++) begin
        if (clear) count[j] <= '0;
        else if (take[j] && (word[j] != '1) && !word[j][DT_W] && (count[j] != '1))
          count[j] <= count[j] + 1'b1;
      end
    end
  end

  always_comb begin
    logic [CNT_W-1:0] best;
    best      = count[0];
    class_idx = '0;
    for (int j = 1; j < N_CLASS; j++) begin
      if (count[j] > best) begin
        best      = count[j];
        class_idx = IW'(j);
      end
    end
    class_valid = (best != '0);
  end

endmodule
