// tb_neuron_core: drives one neuron with rotation steps and events the way
// the common stage would, and checks every output word and the potential
// against an independent model of Eq. 2/3 (decay by 2**-dt, weight sum,
// reset by subtracting the threshold per spike, differential-time encoding,
// overflow words). Output back-pressure is random. A directed part checks
// the decay of a known potential: 40 -> 20 after dt = 1 and the same 20
// held through an event that carries only overflow heads.
module tb_neuron_core;
  import snn_pkg::*;
  localparam int N = 6, DT_W = 4, W_W = 6, W_FRAC = 4;
  localparam int OVF = (1 << DT_W) - 1;
  localparam int ALL1 = (1 << (DT_W + 1)) - 1;
  localparam int TH = 1 << W_FRAC, THL = -(1 << W_FRAC);
  localparam int ACC_W = W_W + $clog2(N) + 1, P_W = ACC_W + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic [$clog2(N+1)-1:0] wr_addr;
  logic signed [W_W-1:0] wr_data;
  rot_step_t step;
  logic evt, evt_has_spike, out_valid, out_ready, busy;
  logic [DT_W-1:0] evt_dt;
  logic [DT_W:0] out_word;
  logic signed [P_W-1:0] potential;

  neuron_core #(.N_SYN(N), .DT_W(DT_W), .W_W(W_W), .W_FRAC(W_FRAC), .USE_LOW(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  int w[N];
  int exp_q[$], got_q[$];
  longint mp = 0, msl = 0, msu = 0;
  int n_ovf = 0, n_pos = 0, n_neg = 0, n_zero = 0, n_bp = 0;

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

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 99) < 70);
    if (rst_n && out_valid && out_ready) got_q.push_back(int'(out_word));
    if (out_valid && !out_ready) n_bp++;
  end

  // Model of the neuron for one event.
  task automatic model_event(input int acc, input int dt, input bit hs);
    longint m, x;
    msl += dt;
    if (msl >= OVF) begin exp_q.push_back(ALL1); msl -= OVF; n_ovf++; end
    if (hs) begin
      m = (mp < 0) ? -mp : mp;
      m = ((msu + dt) >= P_W) ? 0 : (m >> (msu + dt));
      x = ((mp < 0) ? -m : m) + acc;
      if (x > (1 << (P_W-1)) - 1) x = (1 << (P_W-1)) - 1;
      if (x < -(1 << (P_W-1))) x = -(1 << (P_W-1));
      mp = x; msu = 0;
    end else begin
      msu += dt;
    end
    forever begin
      if (mp >= TH) begin
        exp_q.push_back(int'(msl)); if (msl == 0) n_zero++; n_pos++; mp -= TH; msl = 0;
      end else if (mp <= THL) begin
        exp_q.push_back(int'((1 << DT_W) | msl)); if (msl == 0) n_zero++; n_neg++; mp -= THL; msl = 0;
      end else break;
    end
  endtask

  // One event: heads with given relative times, spike flags and signs.
  task automatic do_event(input int t[N], input bit sp[N], input bit sg[N], input int dt);
    int run, acc; bit nm, eqf, hs;
    acc = 0; hs = 0; run = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      nm  = (i == 0) || (t[i] < run);
      eqf = !nm && (t[i] == run);
      step = '{valid: 1'b1, new_min: nm, eq: eqf, spike: sp[i], sign: sg[i]};
      if (nm) begin run = t[i]; acc = sp[i] ? (sg[i] ? -w[i] : w[i]) : 0; hs = sp[i]; end
      else if (eqf) begin acc += sp[i] ? (sg[i] ? -w[i] : w[i]) : 0; hs |= sp[i]; end
    end
    @(negedge clk) step = '0;
    @(negedge clk);
    while (busy) @(negedge clk);
    evt = 1; evt_dt = DT_W'(dt); evt_has_spike = hs;
    @(negedge clk) evt = 0;
    model_event(acc, dt, hs);
  endtask

  initial begin
    int t[N]; bit sp[N]; bit sg[N];
    wr_en = 0; wr_addr = 0; wr_data = 0; step = '0; evt = 0; evt_dt = 0; evt_has_spike = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: weight 40 on synapse 0 needs 3 thresholds... use 40 -> fires twice, keeps 8
    w = '{31, 9, -20, 0, 5, -31};
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = ($clog2(N+1))'(i); wr_data = W_W'(w[i]);
    end
    @(negedge clk) wr_en = 0;
    // event 1: synapses 0 and 1 together (31 + 9 = 40) at dt = 3
    t = '{2, 2, 5, 5, 5, 5}; sp = '{1, 1, 1, 1, 1, 1}; sg = '{0, 0, 0, 0, 0, 0};
    do_event(t, sp, sg, 3);
    while (busy) @(negedge clk);
    check(potential == 8, $sformatf("40 - 2*16 = 8, got %0d", potential));
    // event 2: only overflow heads: potential must not change
    sp = '{0, 0, 0, 0, 0, 0};
    t = '{0, 0, 0, 0, 0, 0};
    do_event(t, sp, sg, 1);
    while (busy) @(negedge clk);
    check(potential == 8, $sformatf("overflow-only event keeps 8, got %0d", potential));
    // event 3: weight-0 spike after dt = 1: decay over 2 steps, 8 -> 2
    t = '{3, 3, 3, 0, 3, 3}; sp = '{1, 1, 1, 1, 1, 1};
    do_event(t, sp, sg, 1);
    while (busy) @(negedge clk);
    check(potential == 2, $sformatf("8 >> 2 = 2, got %0d", potential));
    // random part
    for (int e = 0; e < 300; e++) begin
      int dt;
      for (int i = 0; i < N; i++) begin
        t[i]  = int'($urandom_range(0, 3));
        sp[i] = ($urandom_range(0, 9) != 0);
        sg[i] = $urandom_range(0, 1);
      end
      dt = (e % 7 == 0) ? OVF : int'($urandom_range(0, (e % 3 == 0) ? OVF : 3));
      if (e % 5 == 0) begin
        @(negedge clk); wr_en = 1; wr_addr = ($clog2(N+1))'(e % N);
        w[e % N] = int'($urandom_range(0, 63)) - 32; wr_data = W_W'(w[e % N]);
        @(negedge clk) wr_en = 0;
      end
      do_event(t, sp, sg, dt);
    end
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    check(potential == P_W'(mp), $sformatf("final potential %0d expected %0d", potential, mp));
    check(got_q.size() == exp_q.size(), $sformatf("%0d words, expected %0d", got_q.size(), exp_q.size()));
    for (int k = 0; k < exp_q.size() && k < got_q.size(); k++)
      check(got_q[k] == exp_q[k], $sformatf("word %0d: %h expected %h", k, got_q[k], exp_q[k]));
    $display("ovf=%0d pos=%0d neg=%0d zero_dt=%0d backpressure=%0d", n_ovf, n_pos, n_neg, n_zero, n_bp);
    check(n_ovf > 0 && n_pos > 0 && n_neg > 0 && n_zero > 0 && n_bp > 0, "all output kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
