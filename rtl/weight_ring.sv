// weight_ring: the rotation register that holds one neuron's synapse weights.
//
// The paper keeps each neuron's weights w_1..w_n in a register that rotates in
// step with the layer's ring of spike times, so that the weight leaving the
// ring belongs to the synapse whose time is being compared. Here the rotation
// is realised as a circular buffer: a memory of N words and a read pointer
// that advances by one (wrapping from N-1 to 0) on every cycle with rot high.
// After N rotations the pointer is back at synapse 0, exactly as a shift ring
// returns to its start; the memory form lets the weights live in RAM or
// shift-register LUTs instead of N*W_W flip-flops. That choice is this
// design's own.
//
// Timing: on a cycle with rot high, w_out shows the weight of the synapse the
// pointer addressed in that cycle from the next cycle on. Weights are loaded
// through wr_en/wr_addr/wr_data (this design's choice: the paper does not say
// how weights get in). ptr reports the synapse index that the next rot reads.
module weight_ring #(
  parameter int unsigned N   = 784,
  parameter int unsigned W_W = 6
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(N+1)-1:0]       wr_addr,
  input  logic signed [W_W-1:0]        wr_data,
  input  logic                         rot,
  output logic signed [W_W-1:0]        w_out,
  output logic [$clog2(N+1)-1:0]       ptr
);
  localparam int unsigned AW = $clog2(N+1);

  logic signed [W_W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (wr_en && (wr_addr < AW'(N))) mem[wr_addr] <= wr_data;
    if (rot) w_out <= mem[ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   ptr <= '0;
    else if (rot) ptr <= (ptr == AW'(N-1)) ? '0 : ptr + 1'b1;
  end

endmodule
