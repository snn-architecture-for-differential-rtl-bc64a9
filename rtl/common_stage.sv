// common_stage: finds the next input spike time of a fully connected layer.
//
// Every input synapse of a layer feeds every neuron, so the search for the
// next input event is done once per layer (paper Fig. 3). Each synapse has a
// time integrator: when a new word is taken from its buffer, its dt (or
// OVF = 2**DT_W-1 for an overflow word) is added to that synapse's time,
// turning differential time into the time of the head spike. The N times sit
// in a ring. To find the next event the ring is rotated N times; on the way
// each time passes a subtractor that removes t_last, the time of the previous
// event, and then a comparator that keeps the running minimum in t_curr. After
// the full turn every time is back in its slot, now measured from the
// previous event, and t_curr is the distance dt from the previous event to
// the next one. That dt goes to the neuron cores and becomes t_last for the
// next turn. Because all times are kept relative to the last event they stay
// below 2*OVF and need only DT_W+1 bits; this is how this design realises the
// paper's statement that the integrators and the layer time register are
// reduced as time overflows.
//
// Each slot carries a candidate bit. A step whose time is below the running
// minimum clears all candidate bits at once and sets its own; a tie sets its
// own. After the turn the candidate slots are exactly the heads at the event
// time; they are consumed, and their buffers are popped in the next load
// phase. A synapse whose buffer is empty stalls the load phase: the event
// order cannot be known until every synapse has a head (overflow words
// guarantee one arrives within OVF time steps of spike time).
//
// Sequence per event (controller state in snn_pkg::layer_state_t):
//  L_LOAD  pop every consumed synapse whose buffer has a word and integrate
//          it; stay while some consumed synapse is still empty (stall).
//  L_ROT   N cycles, one ring step each; step is broadcast to the neurons.
//  L_DRAIN one cycle for the neurons' weight read and accumulate.
//  L_UPD   wait for all neurons to finish sending, then pulse evt with dt.
// An event therefore takes N+3 cycles plus stalls. The rotation and
// subtract/compare follow the paper's Fig. 3; the candidate bits, the state
// sequence and the overlap of sending with the next search are this design's.
module common_stage
  import snn_pkg::*;
#(
  parameter int unsigned N    = 784,
  parameter int unsigned DT_W = DEF_DT_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // synaptic buffer heads
  input  logic [DT_W:0]         head_word  [N],
  input  logic [N-1:0]          head_valid,
  output logic [N-1:0]          pop,
  // to the neuron cores
  output rot_step_t             step,
  output logic                  evt,
  output logic [DT_W-1:0]       evt_dt,
  output logic                  evt_has_spike,
  input  logic                  neurons_busy,
  // status
  output layer_state_t          state,
  output logic                  stall,
  output logic [DT_W:0]         t_curr,
  output logic [DT_W:0]         t_last
);
  localparam int unsigned TW = DT_W + 1;
  localparam int unsigned KW = $clog2(N+1);
  localparam logic [TW-1:0] OVF = {1'b0, {DT_W{1'b1}}};

  logic [TW-1:0]  r_time [N];
  logic [N-1:0]   r_sign, r_ovf, r_cand;
  logic [N-1:0]   need;
  logic [KW-1:0]  k;
  logic           has_spike_run;

  // ring output side: subtract t_last and compare with the running minimum
  logic [TW-1:0]  v;
  logic           new_min, eq;
  assign v       = r_time[0] - t_last;
  assign new_min = (k == '0) || (v < t_curr);
  assign eq      = !new_min && (v == t_curr);

  always_comb begin
    step = '0;
    if (state == L_ROT) begin
      step.valid   = 1'b1;
      step.new_min = new_min;
      step.eq      = eq;
      step.spike   = !r_ovf[0];
      step.sign    = r_sign[0];
    end
  end

  assign pop           = (state == L_LOAD) ? (need & head_valid) : '0;
  assign stall         = (state == L_LOAD) && ((need & ~head_valid) != '0);
  assign evt           = (state == L_UPD) && !neurons_busy;
  assign evt_dt        = DT_W'(t_curr);
  assign evt_has_spike = has_spike_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= L_LOAD;
      need          <= '1;
      k             <= '0;
      t_curr        <= '0;
      t_last        <= '0;
      has_spike_run <= 1'b0;
      r_sign        <= '0;
      r_ovf         <= '0;
      r_cand        <= '0;
      for (int i = 0; i < N; i++) r_time[i] <= '0;
    end else begin
      case (state)
        L_LOAD: begin
          for (int i = 0; i < N; i++) begin
            if (pop[i]) begin
              // time integrator; the all-ones word is an overflow spike
              if (head_word[i] == '1) begin
                r_time[i] <= r_time[i] + OVF;
                r_ovf[i]  <= 1'b1;
                r_sign[i] <= 1'b0;
              end else begin
                r_time[i] <= r_time[i] + TW'(head_word[i][DT_W-1:0]);
                r_ovf[i]  <= 1'b0;
                r_sign[i] <= head_word[i][DT_W];
              end
            end
          end
          need <= need & ~head_valid;
          if (!stall) begin
            state <= L_ROT;
            k     <= '0;
          end
        end
        L_ROT: begin
          for (int i = 0; i < N-1; i++) begin
            r_time[i] <= r_time[i+1];
            r_sign[i] <= r_sign[i+1];
            r_ovf[i]  <= r_ovf[i+1];
            r_cand[i] <= new_min ? 1'b0 : r_cand[i+1];
          end
          r_time[N-1] <= v;
          r_sign[N-1] <= r_sign[0];
          r_ovf[N-1]  <= r_ovf[0];
          r_cand[N-1] <= new_min || eq;
          if (new_min) begin
            t_curr        <= v;
            has_spike_run <= !r_ovf[0];
          end else if (eq) begin
            has_spike_run <= has_spike_run || !r_ovf[0];
          end
          if (k == KW'(N-1)) state <= L_DRAIN;
          else               k     <= k + 1'b1;
        end
        L_DRAIN: state <= L_UPD;
        L_UPD: if (!neurons_busy) begin
          t_last <= t_curr;
          need   <= r_cand;
          r_cand <= '0;
          state  <= L_LOAD;
        end
        default: state <= L_LOAD;
      endcase
    end
  end

  // Times never fall below the previous event; a candidate tie is exact.
  a_event_le_ovf: assert property (@(posedge clk) disable iff (!rst_n) evt |-> t_curr <= OVF);
  a_no_neg: assert property (@(posedge clk) disable iff (!rst_n)
                             state == L_ROT |-> r_time[0] >= t_last);

endmodule
