// tb_neuron_layer: random spike trains through a small layer, checked against
// the reference model word by word.
//
// Five synapses feed four neurons with random 6-bit weights; both thresholds
// are on so positive, negative, zero-dt and overflow words all occur. The
// input trains mix random dt values, +/-0 words and overflow words and end in
// a run of overflow words so that the layer can process every spike. The
// output handshake is throttled at random to exercise back-pressure. Checked:
// every output word of every neuron, the number of events, and that every
// event spends exactly N_IN cycles in rotation (the paper rotates the n times
// of a layer n times per event).
module tb_neuron_layer;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int N_IN = 5, N_OUT = 4, DT_W = 4, W_W = 6, W_FRAC = 4;
  localparam int P_W = W_W + $clog2(N_IN) + 2;
  localparam int ALL1 = (1 << (DT_W + 1)) - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DT_W:0]   in_word [N_IN];
  logic [N_IN-1:0] in_valid, in_ready;
  logic            wr_en;
  logic [$clog2(N_OUT+1)-1:0] wr_neuron;
  logic [$clog2(N_IN+1)-1:0]  wr_syn;
  logic signed [W_W-1:0]      wr_data;
  logic [DT_W:0]   out_word [N_OUT];
  logic [N_OUT-1:0] out_valid, out_ready;
  logic evt, stall;
  layer_state_t state;

  neuron_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .DT_W(DT_W), .W_W(W_W), .W_FRAC(W_FRAC),
                 .USE_LOW(1'b1), .BUF_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int w[];
  word_q_t in_tr[], out_ref[], out_got[], drive_q[];
  ref_stats_t st;
  ref_cfg_t cfg;
  int n_evt = 0, rot_cycles = 0, n_stall = 0, n_bp = 0;
  longint cyc = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input drivers: one queue per synapse
  // the driven words change only at the falling edge, away from the DUT's sampling edge
  logic [N_IN-1:0] took = '0;
  always @(posedge clk) took <= in_valid & in_ready;
  always @(negedge clk) for (int i = 0; i < N_IN; i++) if (took[i]) void'(drive_q[i].pop_front());
  always_comb for (int i = 0; i < N_IN; i++) begin
    in_valid[i] = rst_n && drive_q.size() == N_IN && drive_q[i].size() != 0;
    in_word[i]  = (drive_q.size() == N_IN && drive_q[i].size() != 0) ? (DT_W+1)'(drive_q[i][0]) : '0;
  end

  // output monitor and throttling
  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= N_OUT'($urandom) | N_OUT'($urandom);
    if (rst_n) begin
      for (int j = 0; j < N_OUT; j++) begin
        if (out_valid[j] && out_ready[j]) out_got[j].push_back(int'(out_word[j]));
        if (out_valid[j] && !out_ready[j]) n_bp++;
      end
      if (state == L_ROT) rot_cycles++;
      if (stall) n_stall++;
      if (evt) begin
        n_evt++;
        check(rot_cycles == N_IN, $sformatf("event %0d rotated %0d cycles", n_evt, rot_cycles));
        rot_cycles = 0;
      end
    end
  end

  initial begin
    wr_en = 0; wr_neuron = 0; wr_syn = 0; wr_data = 0;
    out_got = new[N_OUT]; drive_q = new[0];
    in_tr = new[N_IN];
    w = new[N_IN * N_OUT];
    foreach (w[k]) w[k] = int'($urandom_range(0, 63)) - 32;
    for (int i = 0; i < N_IN; i++) begin
      for (int k = 0; k < 40; k++) begin
        automatic int r = int'($urandom_range(0, 99));
        automatic int s = int'($urandom_range(0, 1));
        if (r < 8)       in_tr[i].push_back(ALL1);
        else if (r < 20) in_tr[i].push_back((s << DT_W));
        else             in_tr[i].push_back((s << DT_W) | int'($urandom_range(1, (1 << DT_W) - 2)));
      end
      repeat (6) in_tr[i].push_back(ALL1);
    end
    cfg = '{dt_w: DT_W, decay_shift: 1, th_high: 1 << W_FRAC, use_low: 1,
            th_low: -(1 << W_FRAC), p_w: P_W};
    run_layer(cfg, N_IN, N_OUT, w, in_tr, out_ref, st);

    repeat (3) @(posedge clk);
    rst_n = 1;
    // load weights
    for (int j = 0; j < N_OUT; j++)
      for (int i = 0; i < N_IN; i++) begin
        @(negedge clk);
        wr_en = 1; wr_neuron = ($clog2(N_OUT+1))'(j); wr_syn = ($clog2(N_IN+1))'(i);
        wr_data = W_W'(w[j*N_IN+i]);
      end
    @(negedge clk) wr_en = 0;
    drive_q = in_tr;
    // run until quiet
    begin
      automatic int quiet = 0;
      while (quiet < 500) begin
        @(posedge clk);
        if (evt || (out_valid != '0)) quiet = 0; else quiet++;
      end
    end
    check(n_evt == st.events, $sformatf("events dut=%0d ref=%0d", n_evt, st.events));
    for (int j = 0; j < N_OUT; j++) begin
      check(out_got[j].size() == out_ref[j].size(),
            $sformatf("neuron %0d: %0d words, expected %0d", j, out_got[j].size(), out_ref[j].size()));
      for (int k = 0; k < out_ref[j].size() && k < out_got[j].size(); k++)
        check(out_got[j][k] == out_ref[j][k],
              $sformatf("neuron %0d word %0d: %h expected %h", j, k, out_got[j][k], out_ref[j][k]));
    end
    $display("events=%0d ovf_events=%0d ties=%0d ovf_out=%0d pos=%0d neg=%0d zero_dt=%0d stall_cycles=%0d backpressure=%0d",
             st.events, st.ovf_events, st.tie_events, st.ovf_out, st.pos_out, st.neg_out,
             st.zero_dt_out, n_stall, n_bp);
    check(st.ovf_out > 0 && st.pos_out > 0 && st.neg_out > 0 && st.zero_dt_out > 0 &&
          st.tie_events > 0 && st.ovf_events > 0 && n_bp > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
