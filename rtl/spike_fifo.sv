// spike_fifo: synaptic buffer of one input synapse.
//
// A small first-in first-out queue of differential-time spike words placed in
// front of each synapse of a layer. The upstream neuron writes with a
// valid/ready handshake (a word is taken on a clock edge where in_valid and
// in_ready are both high). The layer's common stage looks at the oldest word
// on head_word/head_valid and removes it by raising pop for one cycle; the
// word after it appears on the next cycle. A word written into an empty queue
// is visible on the head one cycle after it is taken. in_ready is high while
// the queue is not full; nothing is bypassed.
//
// The paper draws a buffer per synapse but gives no depth or handshake; the
// depth (a power of two) and the handshake are this design's choice.
module spike_fifo #(
  parameter int unsigned W     = 9,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_word,
  input  logic         in_valid,
  output logic         in_ready,
  output logic [W-1:0] head_word,
  output logic         head_valid,
  input  logic         pop
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, do_pop;

  assign in_ready   = (count < (AW+1)'(DEPTH));
  assign head_valid = (count != '0);
  assign head_word  = mem[rd_ptr];
  assign push       = in_valid && in_ready;
  assign do_pop     = pop && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push)   wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_word;
  end

  // The common stage only pops a head it can see.
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid);

endmodule
