// tb_common_stage: random spike trains on seven synapses; the heads are
// offered with random gaps (so the load phase stalls) and the neurons report
// busy at random. The sequence of events is checked against a model that
// merges the trains by absolute time: each event's dt and has-spike flag, the
// set of synapses whose heads are consumed (popped in the next load phase),
// the spike/sign flags broadcast at every rotation step, and that each event
// takes exactly N rotation steps.
module tb_common_stage;
  import snn_pkg::*;
  localparam int N = 7, DT_W = 4;
  localparam int OVF = (1 << DT_W) - 1;
  localparam int ALL1 = (1 << (DT_W + 1)) - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DT_W:0] head_word [N];
  logic [N-1:0] head_valid, pop;
  rot_step_t step;
  logic evt, evt_has_spike, neurons_busy, stall;
  logic [DT_W-1:0] evt_dt;
  layer_state_t state;
  logic [DT_W:0] t_curr, t_last;

  common_stage #(.N(N), .DT_W(DT_W)) dut (.*);

  int checks = 0, failures = 0;
  int tr[N][$];          // words still to offer per synapse
  longint at[N][$];      // absolute times of all words, for the model
  bit aovf[N][$], asg[N][$];
  int ev = 0, steps = 0, n_stall = 0, n_busy_wait = 0;
  longint prev = 0;
  bit exp_grp[N];
  bit grp_pending = 0;
  bit offer[N];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  // the offered heads change only at the falling edge, away from the DUT's sampling edge
  logic [N-1:0] took = '0;
  always @(posedge clk) took <= rst_n ? pop : '0;
  always @(negedge clk) for (int i = 0; i < N; i++) begin
    if (took[i]) void'(tr[i].pop_front());
    offer[i]      = ($urandom_range(0, 4) != 0);
    head_valid[i] = offer[i] && tr[i].size() != 0;
    head_word[i]  = (tr[i].size() != 0) ? (DT_W+1)'(tr[i][0]) : '0;
  end

  always @(posedge clk) if (rst_n) begin
    neurons_busy <= ($urandom_range(0, 3) == 0);
    if (stall) n_stall++;
    if (state == L_UPD && neurons_busy) n_busy_wait++;
    // pops after an event must be exactly the synapses of that event
    if (pop != '0 || (state == L_LOAD && grp_pending && !stall)) begin
      for (int i = 0; i < N; i++) if (pop[i]) begin
        if (grp_pending) check(exp_grp[i], $sformatf("event %0d: synapse %0d popped, not in event", ev, i));
        exp_grp[i] = 0;
      end
      if (grp_pending && !stall) begin
        for (int i = 0; i < N; i++) check(!exp_grp[i], $sformatf("event %0d: synapse %0d not popped", ev, i));
        grp_pending = 0;
      end
    end
    if (step.valid) begin
      // step k shows synapse k's head (the heads being compared this turn)
      check(step.spike == !aovf[steps][0] && (!step.spike || step.sign == asg[steps][0]),
            $sformatf("event %0d step %0d flags", ev, steps));
      steps++;
    end
    if (evt) begin
      longint tmin; bit hs;
      check(steps == N, $sformatf("event %0d: %0d rotation steps", ev, steps));
      steps = 0;
      tmin = at[0][0];
      for (int i = 1; i < N; i++) if (at[i][0] < tmin) tmin = at[i][0];
      hs = 0;
      for (int i = 0; i < N; i++) begin
        exp_grp[i] = (at[i][0] == tmin);
        if (exp_grp[i] && !aovf[i][0]) hs = 1;
      end
      check(evt_dt == DT_W'(tmin - prev), $sformatf("event %0d: dt %0d expected %0d", ev, evt_dt, tmin - prev));
      check(evt_has_spike == hs, $sformatf("event %0d: has_spike", ev));
      for (int i = 0; i < N; i++) if (exp_grp[i]) begin
        void'(at[i].pop_front()); void'(aovf[i].pop_front()); void'(asg[i].pop_front());
      end
      prev = tmin;
      grp_pending = 1;
      ev++;
    end
  end

  int n_events_model;
  initial begin
    for (int i = 0; i < N; i++) begin
      automatic longint t = 0;
      for (int k = 0; k < 30; k++) begin
        automatic int r = int'($urandom_range(0, 99)), s = int'($urandom_range(0, 1)), wd;
        if (r < 10)      wd = ALL1;
        else if (r < 25) wd = s << DT_W;
        else             wd = (s << DT_W) | int'($urandom_range(1, OVF));
        tr[i].push_back(wd);
        if (wd == ALL1) begin t += OVF; aovf[i].push_back(1); asg[i].push_back(0); end
        else begin t += wd & OVF; aovf[i].push_back(0); asg[i].push_back(s != 0); end
        at[i].push_back(t);
      end
    end
    // number of events the model will see: while every synapse has a head
    begin
      longint a[N][$]; int cnt = 0; bit done = 0;
      for (int i = 0; i < N; i++) a[i] = at[i];
      while (!done) begin
        longint tm;
        for (int i = 0; i < N; i++) if (a[i].size() == 0) done = 1;
        if (done) break;
        tm = a[0][0];
        for (int i = 1; i < N; i++) if (a[i][0] < tm) tm = a[i][0];
        for (int i = 0; i < N; i++) if (a[i][0] == tm) void'(a[i].pop_front());
        cnt++;
      end
      n_events_model = cnt;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    begin
      automatic int quiet = 0;
      while (quiet < 300) begin @(posedge clk); if (evt) quiet = 0; else quiet++; end
    end
    check(ev == n_events_model, $sformatf("%0d events, expected %0d", ev, n_events_model));
    $display("events=%0d stall_cycles=%0d busy_wait_cycles=%0d", ev, n_stall, n_busy_wait);
    check(n_stall > 0 && n_busy_wait > 0, "stall and busy wait exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
