// neuron_core: one leaky integrate-and-fire neuron of a layer.
//
// Function (paper, Eq. 2 and 3): at every input event the potential becomes
//   P <- r(P * beta**dt + sum_i w_i * s_i)
// with beta = 2**-DECAY_SHIFT, dt the time since the last potential update,
// w_i the synapse weights and s_i = +1/-1 the signs of the input spikes that
// occur at this event time. r() subtracts the threshold with the sign of every
// spike fired ("reset-to-mod"): while P >= TH_HIGH a positive spike is sent
// and TH_HIGH subtracted; with USE_LOW set, while P <= TH_LOW a negative spike
// is sent and TH_LOW subtracted. A potential that needs k thresholds sends k
// spikes, the first carrying the time since this neuron's previous output word
// and the others a dt of zero.
//
// How it works (paper Fig. 4):
//  * weight_ring holds w_1..w_N and advances once per rotation step of the
//    layer's common stage, so the weight read belongs to the synapse whose
//    time is being compared at that step.
//  * The weight accumulator restarts with +/-w on a step flagged new_min and
//    adds +/-w on a step flagged eq. Overflow heads (spike = 0) add nothing.
//    After the last step it holds the weight sum of the spikes at the event.
//  * On evt the decay shifter divides P by 2**(DECAY_SHIFT*dt) (magnitude
//    shift, rounding toward zero: this design's choice) and the accumulator is
//    added, saturating at the P_W range. Events made only of overflow spikes
//    leave P untouched, as the paper states; their time is kept in since_upd
//    and applied as decay at the next real update.
//  * The last-spike-time register since_last counts time since this neuron's
//    previous output word. When it reaches OVF = 2**DT_W-1 an overflow word
//    (all ones) is sent and OVF is subtracted, so dt fields never exceed DT_W
//    bits and the next layer keeps seeing time pass.
//
// Interface/timing: step is the broadcast rotation step (see snn_pkg); the
// weight is read one cycle after a step and the accumulator updated the cycle
// after that, so evt must come at least two cycles after the last step. evt is
// a one-cycle pulse with the event's dt (<= OVF) and has_spike (some real
// spike is at the event); it must only come while busy is low. The neuron
// then sends its output words on out_word/out_valid/out_ready, one per
// accepted cycle: the overflow word first, then the spikes. busy is high
// until the last word is taken.
module neuron_core
  import snn_pkg::*;
#(
  parameter int unsigned N_SYN       = 784,
  parameter int unsigned DT_W        = DEF_DT_W,
  parameter int unsigned W_W         = DEF_W_W,
  parameter int unsigned W_FRAC      = DEF_W_FRAC,
  parameter int unsigned DECAY_SHIFT = DEF_DECAY_SHIFT,
  parameter int          TH_HIGH     = 1 << W_FRAC,
  parameter bit          USE_LOW     = 1'b0,
  parameter int          TH_LOW      = -(1 << W_FRAC),
  parameter int unsigned ACC_W       = W_W + $clog2(N_SYN) + 1,
  parameter int unsigned P_W         = ACC_W + 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight loading
  input  logic                         wr_en,
  input  logic [$clog2(N_SYN+1)-1:0]   wr_addr,
  input  logic signed [W_W-1:0]        wr_data,
  // from the common stage
  input  rot_step_t                    step,
  input  logic                         evt,
  input  logic [DT_W-1:0]              evt_dt,
  input  logic                         evt_has_spike,
  // outgoing differential-time spike words
  output logic [DT_W:0]                out_word,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic                         busy,
  // observation
  output logic signed [P_W-1:0]        potential
);
  localparam int unsigned SU_W = 16;                 // since_upd width (saturating)
  localparam logic [DT_W:0] OVF = {1'b0, {DT_W{1'b1}}};
  localparam logic signed [P_W:0] P_MAX = (P_W+1)'((1 << (P_W-1)) - 1);
  localparam logic signed [P_W:0] P_MIN = -P_MAX - 1;

  // ---------------------------------------------------------------- weights
  logic signed [W_W-1:0]      w_q;
  logic [$clog2(N_SYN+1)-1:0] w_ptr;
  weight_ring #(.N(N_SYN), .W_W(W_W)) u_ring (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .rot(step.valid), .w_out(w_q), .ptr(w_ptr)
  );

  // ------------------------------------------------------ weight accumulator
  rot_step_t                 step_q;
  logic signed [ACC_W-1:0]   acc;
  logic signed [ACC_W-1:0]   contrib;

  always_comb begin
    if (!step_q.spike)    contrib = '0;
    else if (step_q.sign) contrib = -ACC_W'(w_q);
    else                  contrib =  ACC_W'(w_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q <= '0;
      acc    <= '0;
    end else begin
      step_q <= step;
      if (step_q.valid) begin
        if (step_q.new_min)  acc <= contrib;
        else if (step_q.eq)  acc <= acc + contrib;
      end
    end
  end

  // ------------------------------------------------- decay and potential update
  neuron_state_t            state;
  logic signed [P_W-1:0]    p_q;
  logic [DT_W-1:0]          since_last;
  logic [SU_W-1:0]          since_upd;
  logic                     pend_ovf;

  logic [SU_W:0]            eff_dt;
  logic [SU_W+7:0]          shamt;
  logic [P_W-1:0]           p_mag, p_mag_sh;
  logic signed [P_W:0]      p_dec, p_sum;
  logic signed [P_W-1:0]    p_new;
  logic [DT_W:0]            sl_sum;

  always_comb begin
    eff_dt   = (SU_W+1)'(since_upd) + (SU_W+1)'(evt_dt);
    shamt    = (SU_W+8)'(eff_dt) * (SU_W+8)'(DECAY_SHIFT);
    p_mag    = p_q[P_W-1] ? P_W'(-p_q) : P_W'(p_q);
    p_mag_sh = (shamt >= (SU_W+8)'(P_W)) ? '0 : (p_mag >> shamt);
    p_dec    = p_q[P_W-1] ? -(P_W+1)'(p_mag_sh) : (P_W+1)'(p_mag_sh);
    p_sum    = p_dec + (P_W+1)'(acc);
    if (p_sum > P_MAX)      p_new = P_W'(P_MAX);
    else if (p_sum < P_MIN) p_new = P_W'(P_MIN);
    else                    p_new = P_W'(p_sum);
    sl_sum   = (DT_W+1)'(since_last) + (DT_W+1)'(evt_dt);
  end

  // ------------------------------------------------ thresholding and encoding
  logic fire_pos, fire_neg;
  assign fire_pos = (p_q >= P_W'(TH_HIGH));
  assign fire_neg = USE_LOW && (p_q <= P_W'(TH_LOW));

  always_comb begin
    out_valid = 1'b0;
    out_word  = '0;
    if (state == N_EMIT) begin
      if (pend_ovf) begin
        out_valid = 1'b1;
        out_word  = '1;
      end else if (fire_pos) begin
        out_valid = 1'b1;
        out_word  = {1'b0, since_last};
      end else if (fire_neg) begin
        out_valid = 1'b1;
        out_word  = {1'b1, since_last};
      end
    end
  end

  assign busy      = (state == N_EMIT);
  assign potential = p_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= N_IDLE;
      p_q        <= '0;
      since_last <= '0;
      since_upd  <= '0;
      pend_ovf   <= 1'b0;
    end else begin
      case (state)
        N_IDLE: if (evt) begin
          if (sl_sum >= OVF) begin
            pend_ovf   <= 1'b1;
            since_last <= DT_W'(sl_sum - OVF);
          end else begin
            since_last <= DT_W'(sl_sum);
          end
          if (evt_has_spike) begin
            p_q       <= p_new;
            since_upd <= '0;
          end else begin
            since_upd <= (eff_dt > (SU_W+1)'({SU_W{1'b1}})) ? '1 : SU_W'(eff_dt);
          end
          state <= N_EMIT;
        end
        N_EMIT: begin
          if (!out_valid) begin
            state <= N_IDLE;
          end else if (out_ready) begin
            if (pend_ovf) begin
              pend_ovf <= 1'b0;
            end else if (fire_pos) begin
              p_q        <= p_q - P_W'(TH_HIGH);
              since_last <= '0;
            end else begin
              p_q        <= p_q - P_W'(TH_LOW);
              since_last <= '0;
            end
          end
        end
        default: state <= N_IDLE;
      endcase
    end
  end

  // A rotation always ends where it started, so the weight pointer is home.
  a_ring_home: assert property (@(posedge clk) disable iff (!rst_n) evt |-> w_ptr == '0);
  a_evt_idle: assert property (@(posedge clk) disable iff (!rst_n) evt |-> state == N_IDLE);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
