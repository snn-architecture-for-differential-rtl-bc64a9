// tb_spike_fifo: random pushes and pops against a queue model.
//
// Checks on every cycle that in_ready is high exactly while fewer than DEPTH
// words are held, that head_valid matches the model, and that the head word
// is the oldest word written (so order and contents are kept).
module tb_spike_fifo;
  localparam int W = 9, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] in_word, head_word;
  logic in_valid, in_ready, head_valid, pop;
  spike_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned model[$];
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
    in_valid = 0; pop = 0; in_word = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      check(in_ready == (model.size() < DEPTH), $sformatf("in_ready=%0d with %0d held", in_ready, model.size()));
      check(head_valid == (model.size() != 0), "head_valid");
      if (model.size() != 0) check(head_word == W'(model[0]), $sformatf("head %h expected %h", head_word, model[0]));
      in_valid = ($urandom_range(0, 99) < (c < 1500 ? 60 : 30));
      in_word  = W'($urandom);
      pop      = head_valid && ($urandom_range(0, 99) < (c < 1500 ? 30 : 60));
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (pop && model.size() != 0) void'(model.pop_front());
    if (in_valid && in_ready) model.push_back(int'(in_word));
  end
endmodule
