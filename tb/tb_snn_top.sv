// tb_snn_top: end-to-end run of a reduced network (6 inputs, 5 hidden
// neurons, 3 outputs, 4-bit dt) through the complete top.
//
// Random weights are loaded through the weight port, random input trains
// (with +/-0 and overflow words and a closing run of overflow words) are
// driven on the input handshakes, and the output handshake is throttled. The
// reference model is run layer by layer (hidden outputs feed the output layer)
// and every output word, the classifier counts and its class decision are
// compared. Each mechanism of the design is counted and must occur at least
// once: load-phase stalls in both layers, overflow-only events, events where
// several synapses tie, overflow words, zero-dt (extra amplitude) words,
// negative spikes (the low threshold is enabled here), back-pressure between
// the layers and at the output, and a classifier clear.
module tb_snn_top;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int N_IN = 6, N_HID = 5, N_OUT = 3, DT_W = 4, W_W = 6, W_FRAC = 4, CNT_W = 16;
  localparam int ALL1 = (1 << (DT_W + 1)) - 1;
  localparam int NW = $clog2(((N_HID > N_OUT) ? N_HID : N_OUT) + 1), SW = $clog2(((N_IN > N_HID) ? N_IN : N_HID) + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DT_W:0]    in_word [N_IN];
  logic [N_IN-1:0]  in_valid, in_ready;
  logic             wr_en, wr_layer;
  logic [NW-1:0]    wr_neuron;
  logic [SW-1:0]    wr_syn;
  logic signed [W_W-1:0] wr_data;
  logic [DT_W:0]    out_word [N_OUT];
  logic [N_OUT-1:0] out_valid, out_ready;
  logic             clear_counts;
  logic [CNT_W-1:0] counts [N_OUT];
  logic [$clog2(N_OUT+1)-1:0] class_idx;
  logic             class_valid, evt_hid, evt_out, stall_hid, stall_out;

  snn_top #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .DT_W(DT_W), .W_W(W_W),
            .W_FRAC(W_FRAC), .USE_LOW(1'b1), .BUF_DEPTH(16), .CNT_W(CNT_W)) dut (.*);

  int checks = 0, failures = 0;
  int w1[], w2[];
  word_q_t in_tr[], hid_ref[], out_ref[], out_got[], hid_got[], drive_q[];
  ref_stats_t st1, st2;
  ref_cfg_t c1, c2;
  int n_evt_hid = 0, n_evt_out = 0, n_stall_hid = 0, n_stall_out = 0, n_bp_mid = 0, n_bp_out = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N_IN-1:0] took = '0;
  always @(posedge clk) took <= in_valid & in_ready;
  always @(negedge clk) begin
    for (int i = 0; i < N_IN; i++) begin
      if (took[i]) void'(drive_q[i].pop_front());
      in_valid[i] = rst_n && drive_q.size() == N_IN && drive_q[i].size() != 0;
      in_word[i]  = in_valid[i] ? (DT_W+1)'(drive_q[i][0]) : '0;
    end
    out_ready = N_OUT'($urandom) | N_OUT'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < N_OUT; j++) begin
      if (out_valid[j] && out_ready[j]) out_got[j].push_back(int'(out_word[j]));
      if (out_valid[j] && !out_ready[j]) n_bp_out++;
    end
    for (int j = 0; j < N_HID; j++)
      if (dut.hid_valid[j] && dut.hid_ready[j]) hid_got[j].push_back(int'(dut.hid_word[j]));
    if ((dut.hid_valid & ~dut.hid_ready) != '0) n_bp_mid++;
    if (evt_hid) n_evt_hid++;
    if (evt_out) n_evt_out++;
    if (stall_hid) n_stall_hid++;
    if (stall_out) n_stall_out++;
  end

  task automatic load_weight(input bit layer, input int j, input int i, input int v);
    @(negedge clk);
    wr_en = 1; wr_layer = layer; wr_neuron = NW'(j); wr_syn = SW'(i); wr_data = W_W'(v);
  endtask

  initial begin
    int cnt_ref[N_OUT];
    int best, bi;
    wr_en = 0; wr_layer = 0; wr_neuron = 0; wr_syn = 0; wr_data = 0; clear_counts = 0;
    in_valid = '0; out_ready = '0;
    foreach (in_word[i]) in_word[i] = '0;
    out_got = new[N_OUT]; hid_got = new[N_HID]; drive_q = new[0]; in_tr = new[N_IN];
    w1 = new[N_IN * N_HID]; w2 = new[N_HID * N_OUT];
    foreach (w1[k]) w1[k] = int'($urandom_range(0, 59)) - 28;
    foreach (w2[k]) w2[k] = int'($urandom_range(0, 57)) - 26;
    for (int i = 0; i < N_IN; i++) begin
      for (int k = 0; k < 60; k++) begin
        automatic int r = int'($urandom_range(0, 99));
        automatic int s = int'($urandom_range(0, 99) < 30);
        if (r < 6)       in_tr[i].push_back(ALL1);
        else if (r < 18) in_tr[i].push_back(s << DT_W);
        else             in_tr[i].push_back((s << DT_W) | int'($urandom_range(1, 9)));
      end
      repeat (12) in_tr[i].push_back(ALL1);
    end
    c1 = '{dt_w: DT_W, decay_shift: 1, th_high: 1 << W_FRAC, use_low: 1,
           th_low: -(1 << W_FRAC), p_w: W_W + $clog2(N_IN) + 2};
    c2 = c1; c2.p_w = W_W + $clog2(N_HID) + 2;
    run_layer(c1, N_IN, N_HID, w1, in_tr, hid_ref, st1);
    run_layer(c2, N_HID, N_OUT, w2, hid_ref, out_ref, st2);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N_HID; j++) for (int i = 0; i < N_IN; i++) load_weight(0, j, i, w1[j*N_IN+i]);
    for (int j = 0; j < N_OUT; j++) for (int i = 0; i < N_HID; i++) load_weight(1, j, i, w2[j*N_HID+i]);
    @(negedge clk) wr_en = 0;
    drive_q = in_tr;
    begin
      automatic int quiet = 0;
      while (quiet < 2000) begin
        @(posedge clk);
        if (evt_hid || evt_out || out_valid != '0) quiet = 0; else quiet++;
      end
    end
    check(n_evt_hid == st1.events, $sformatf("hidden events %0d, expected %0d", n_evt_hid, st1.events));
    check(n_evt_out == st2.events, $sformatf("output events %0d, expected %0d", n_evt_out, st2.events));
    for (int j = 0; j < N_HID; j++) begin
      check(hid_got[j].size() == hid_ref[j].size(),
            $sformatf("hidden %0d: %0d words, expected %0d", j, hid_got[j].size(), hid_ref[j].size()));
      for (int k = 0; k < hid_ref[j].size() && k < hid_got[j].size(); k++)
        check(hid_got[j][k] == hid_ref[j][k], $sformatf("hidden %0d word %0d: %h expected %h",
                                                       j, k, hid_got[j][k], hid_ref[j][k]));
    end
    for (int j = 0; j < N_OUT; j++) begin
      cnt_ref[j] = 0;
      foreach (out_ref[j][k]) if (out_ref[j][k] != ALL1 && ((out_ref[j][k] >> DT_W) & 1) == 0) cnt_ref[j]++;
      check(out_got[j].size() == out_ref[j].size(),
            $sformatf("output %0d: %0d words, expected %0d", j, out_got[j].size(), out_ref[j].size()));
      for (int k = 0; k < out_ref[j].size() && k < out_got[j].size(); k++)
        check(out_got[j][k] == out_ref[j][k], $sformatf("output %0d word %0d: %h expected %h",
                                                       j, k, out_got[j][k], out_ref[j][k]));
      check(counts[j] == CNT_W'(cnt_ref[j]), $sformatf("count %0d: %0d expected %0d", j, counts[j], cnt_ref[j]));
    end
    best = cnt_ref[0]; bi = 0;
    for (int j = 1; j < N_OUT; j++) if (cnt_ref[j] > best) begin best = cnt_ref[j]; bi = j; end
    check(class_valid == (best > 0) && class_idx == ($clog2(N_OUT+1))'(bi),
          $sformatf("class %0d expected %0d", class_idx, bi));
    @(negedge clk) clear_counts = 1;
    @(negedge clk) clear_counts = 0;
    check(!class_valid && counts[0] == 0, "classifier clear");

    $display("hidden: events=%0d ovf_events=%0d ties=%0d ovf_out=%0d pos=%0d neg=%0d zero_dt=%0d stalls=%0d",
             st1.events, st1.ovf_events, st1.tie_events, st1.ovf_out, st1.pos_out, st1.neg_out, st1.zero_dt_out, n_stall_hid);
    $display("output: events=%0d ovf_events=%0d ties=%0d ovf_out=%0d pos=%0d neg=%0d zero_dt=%0d stalls=%0d",
             st2.events, st2.ovf_events, st2.tie_events, st2.ovf_out, st2.pos_out, st2.neg_out, st2.zero_dt_out, n_stall_out);
    $display("backpressure: between layers=%0d at output=%0d; class=%0d", n_bp_mid, n_bp_out, bi);
    check(n_stall_hid > 0, "hidden layer stalled on an empty buffer");
    check(n_stall_out > 0, "output layer stalled on an empty buffer");
    check(st1.ovf_events > 0 && st2.ovf_events > 0, "overflow-only events in both layers");
    check(st1.tie_events > 0 && st2.tie_events > 0, "tied head times in both layers");
    check(st1.ovf_out > 0 && st2.ovf_out > 0, "overflow words sent by both layers");
    check(st1.zero_dt_out > 0 && st2.zero_dt_out > 0, "zero-dt spikes sent by both layers");
    check(st1.neg_out > 0, "negative spikes sent");
    check(st1.pos_out > 0 && st2.pos_out > 0, "positive spikes sent by both layers");
    check(n_bp_mid > 0, "back-pressure between layers");
    check(n_bp_out > 0, "back-pressure at the output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
