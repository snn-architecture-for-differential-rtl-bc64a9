// tb_snn_top_full: one complete inference through the network at its full
// size (784 inputs, 1000 hidden neurons, 10 outputs, default widths).
//
// A synthetic 28x28 grey-scale digit (a ring, standing in for an MNIST
// "0") is delta-encoded row by row: the pixel column is the time, and every
// time the brightness has moved by the threshold (0.05 of full scale, as in
// the evaluated setup) from the last sampled level a spike of that sign is
// sent; a change of several thresholds becomes a spike followed by dt = 0
// words. Input i carries the train of row (i mod 28), so every row train
// reaches 28 inputs. Each train closes with three overflow words so that all
// spikes can be processed. The weights are small random values: the output
// layer's 10,000 and hidden neuron 0's 784 go through the weight port, the
// other hidden neurons' weights are written directly into their weight
// memories to save 783,000 load cycles. The testbench checks every hidden and output word,
// the event counts, the classifier counts and class against the reference
// model, and reports the clock cycles the inference took.
module tb_snn_top_full;
  import snn_pkg::*;
  import snn_ref_pkg::*;

  localparam int N_IN = 784, N_HID = 1000, N_OUT = 10, DT_W = 8, W_W = 6, W_FRAC = 4, CNT_W = 16;
  localparam int BUF_DEPTH = 64;
  localparam int OVF = (1 << DT_W) - 1, ALL1 = (1 << (DT_W + 1)) - 1;
  localparam int NW = $clog2(((N_HID > N_OUT) ? N_HID : N_OUT) + 1), SW = $clog2(((N_IN > N_HID) ? N_IN : N_HID) + 1);
  localparam int TH_PIX = 13;   // 0.05 * 255, rounded

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

  snn_top dut (.*);

  int checks = 0, failures = 0;
  int w1[], w2[];
  word_q_t in_tr[], hid_ref[], out_ref[], out_got[], hid_got[], drive_q[];
  word_q_t row_tr[28];
  ref_stats_t st1, st2;
  ref_cfg_t c1, c2;
  int n_evt_hid = 0, n_evt_out = 0, n_stall_hid = 0, n_stall_out = 0;
  longint cyc = 0, t_start = 0, t_end = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
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
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc % 100000 == 0) $display("cycle %0d: hidden events %0d, output events %0d", cyc, n_evt_hid, n_evt_out);
    if (rst_n) begin
      for (int j = 0; j < N_OUT; j++)
        if (out_valid[j] && out_ready[j]) out_got[j].push_back(int'(out_word[j]));
      for (int j = 0; j < N_HID; j++)
        if (dut.hid_valid[j] && dut.hid_ready[j]) hid_got[j].push_back(int'(dut.hid_word[j]));
      if (evt_hid) n_evt_hid++;
      if (evt_out) begin n_evt_out++; t_end = cyc; end
      if (stall_hid) n_stall_hid++;
      if (stall_out) n_stall_out++;
    end
  end

  // Loading all 784,000 hidden weights through the one-per-cycle port would
  // take as long as the whole inference; neurons 1..999 are written straight
  // into their weight memories instead (same contents as a port load).
  event preload;
  for (genvar j = 1; j < N_HID; j++) begin : g_preload
    initial begin
      @(preload);
      for (int i = 0; i < N_IN; i++)
        dut.u_hidden.g_neuron[j].u_neuron.u_ring.mem[i] = W_W'(w1[j*N_IN+i]);
    end
  end

  // grey level of pixel (r, c) of a ring-shaped digit
  function automatic int pixel(int r, int c);
    int d2 = (r - 14) * (r - 14) * 4 + (c - 14) * (c - 14) * 9;
    if (d2 > 900 && d2 < 1500) return 128;
    if (d2 > 700 && d2 < 1800) return 64;
    return 0;
  endfunction

  // send-on-delta encoding of one row; time = column
  function automatic void encode_row(int r, ref word_q_t q);
    int lvl = 0, last_t = 0;
    for (int c = 0; c < 28; c++) begin
      int x = pixel(r, c);
      bit first = 1;
      while (x - lvl >= TH_PIX || lvl - x >= TH_PIX) begin
        bit neg = (lvl - x >= TH_PIX);
        int dt = first ? (c - last_t) : 0;
        while (dt >= OVF) begin q.push_back(ALL1); dt -= OVF; end
        q.push_back((int'(neg) << DT_W) | dt);
        lvl += neg ? -TH_PIX : TH_PIX;
        first = 0; last_t = c;
      end
    end
    repeat (3) q.push_back(ALL1);
  endfunction

  initial begin
    int cnt_ref[N_OUT];
    int best, bi, nspk, max_hw;
    wr_en = 0; wr_layer = 0; wr_neuron = 0; wr_syn = 0; wr_data = 0; clear_counts = 0;
    out_ready = '1;
    out_got = new[N_OUT]; hid_got = new[N_HID]; drive_q = new[0]; in_tr = new[N_IN];
    w1 = new[N_IN * N_HID]; w2 = new[N_HID * N_OUT];
    foreach (w1[k]) begin
      automatic int r = int'($urandom_range(0, 7));
      w1[k] = (r == 0) ? -1 : (r == 1) ? 1 : 0;
    end
    foreach (w2[k]) w2[k] = int'($urandom_range(0, 12)) - 6;
    nspk = 0;
    for (int r = 0; r < 28; r++) begin encode_row(r, row_tr[r]); nspk += row_tr[r].size() - 3; end
    for (int i = 0; i < N_IN; i++) in_tr[i] = row_tr[i % 28];
    c1 = '{dt_w: DT_W, decay_shift: 1, th_high: 1 << W_FRAC, use_low: 0,
           th_low: -(1 << W_FRAC), p_w: W_W + $clog2(N_IN) + 2};
    c2 = c1; c2.p_w = W_W + $clog2(N_HID) + 2;
    run_layer(c1, N_IN, N_HID, w1, in_tr, hid_ref, st1);
    run_layer(c2, N_HID, N_OUT, w2, hid_ref, out_ref, st2);
    $display("input: %0d spike words over 28 row trains; reference: hidden events=%0d spikes=%0d, output events=%0d spikes=%0d",
             nspk, st1.events, st1.pos_out, st2.events, st2.pos_out);

    // Every word a hidden neuron sends before the others send anything must
    // fit in its output-layer buffer, otherwise the layers wait on each other.
    // Keep the whole train of every hidden neuron below the buffer depth.
    max_hw = 0;
    foreach (hid_ref[j]) if (hid_ref[j].size() > max_hw) max_hw = hid_ref[j].size();
    $display("longest hidden train: %0d words (buffer depth %0d)", max_hw, BUF_DEPTH);
    check(max_hw < BUF_DEPTH, "hidden trains fit the output-layer buffers");
    repeat (3) @(posedge clk);
    rst_n = 1;
    // hidden weights: the first neuron through the port, the rest preloaded
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk);
      wr_en = 1; wr_layer = 0; wr_neuron = NW'(0); wr_syn = SW'(i); wr_data = W_W'(w1[i]);
    end
    -> preload;
    for (int j = 0; j < N_OUT; j++)
      for (int i = 0; i < N_HID; i++) begin
        @(negedge clk);
        wr_en = 1; wr_layer = 1; wr_neuron = NW'(j); wr_syn = SW'(i); wr_data = W_W'(w2[j*N_HID+i]);
      end
    @(negedge clk) wr_en = 0;
    t_start = cyc;
    drive_q = in_tr;
    begin
      automatic int quiet = 0;
      while (quiet < 5000) begin
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
        check(hid_got[j][k] == hid_ref[j][k], $sformatf("hidden %0d word %0d", j, k));
    end
    for (int j = 0; j < N_OUT; j++) begin
      cnt_ref[j] = 0;
      foreach (out_ref[j][k]) if (out_ref[j][k] != ALL1 && ((out_ref[j][k] >> DT_W) & 1) == 0) cnt_ref[j]++;
      check(out_got[j].size() == out_ref[j].size(),
            $sformatf("output %0d: %0d words, expected %0d", j, out_got[j].size(), out_ref[j].size()));
      for (int k = 0; k < out_ref[j].size() && k < out_got[j].size(); k++)
        check(out_got[j][k] == out_ref[j][k], $sformatf("output %0d word %0d", j, k));
      check(counts[j] == CNT_W'(cnt_ref[j]), $sformatf("count %0d: %0d expected %0d", j, counts[j], cnt_ref[j]));
    end
    best = cnt_ref[0]; bi = 0;
    for (int j = 1; j < N_OUT; j++) if (cnt_ref[j] > best) begin best = cnt_ref[j]; bi = j; end
    check(class_idx == ($clog2(N_OUT+1))'(bi), $sformatf("class %0d expected %0d", class_idx, bi));
    check(st1.pos_out > 0 && st2.pos_out > 0, "both layers fired");
    check(st1.ovf_out > 0 && st2.ovf_out > 0, "overflow words in both layers");
    $display("class=%0d counts: %0d %0d %0d %0d %0d %0d %0d %0d %0d %0d", class_idx,
             counts[0], counts[1], counts[2], counts[3], counts[4], counts[5], counts[6], counts[7], counts[8], counts[9]);
    $display("inference took %0d cycles after weight loading (last output event); stalls hidden=%0d output=%0d",
             t_end - t_start, n_stall_hid, n_stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
