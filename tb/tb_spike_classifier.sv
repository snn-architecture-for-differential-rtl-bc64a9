// tb_spike_classifier: random output words for ten classes; counts of
// positive spike words (overflow and negative words excluded), the argmax
// with lowest-index tie break, and clear are checked against a model.
module tb_spike_classifier;
  localparam int N = 10, DT_W = 8, CNT_W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear;
  logic [DT_W:0] word [N];
  logic [N-1:0] take;
  logic [CNT_W-1:0] count [N];
  logic [$clog2(N+1)-1:0] class_idx;
  logic class_valid;
  spike_classifier #(.N_CLASS(N), .DT_W(DT_W), .CNT_W(CNT_W)) dut (.*);

  int checks = 0, failures = 0;
  int m[N];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best, bi;
    clear = 0; take = 0;
    foreach (word[j]) word[j] = 0;
    foreach (m[j]) m[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      for (int c = 0; c < 300; c++) begin
        @(negedge clk);
        for (int j = 0; j < N; j++) begin
          automatic int r = int'($urandom_range(0, 99));
          take[j] = ($urandom_range(0, 99) < 5 + 4 * j * (round % 3));
          if (r < 15)      word[j] = '1;                       // overflow
          else if (r < 30) word[j] = {1'b1, DT_W'($urandom)};  // negative spike
          else             word[j] = {1'b0, DT_W'($urandom_range(0, 200))};
          if (take[j] && word[j] != '1 && !word[j][DT_W]) m[j]++;
        end
      end
      @(negedge clk) take = 0;
      best = m[0]; bi = 0;
      for (int j = 1; j < N; j++) if (m[j] > best) begin best = m[j]; bi = j; end
      for (int j = 0; j < N; j++) check(count[j] == CNT_W'(m[j]), $sformatf("count %0d: %0d expected %0d", j, count[j], m[j]));
      check(class_idx == ($clog2(N+1))'(bi), $sformatf("class %0d expected %0d", class_idx, bi));
      check(class_valid == (best != 0), "class_valid");
      clear = 1;
      @(negedge clk) clear = 0;
      foreach (m[j]) m[j] = 0;
      check(class_valid == 0 && count[3] == 0, "clear");
    end
    // tie: two classes with equal counts, lower index wins
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      take = '0; take[7] = 1; take[2] = 1;
      word[7] = 9'd5; word[2] = 9'd0;
    end
    @(negedge clk) take = 0;
    check(class_idx == 2 && count[2] == 3 && count[7] == 3, "tie goes to lower index");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
