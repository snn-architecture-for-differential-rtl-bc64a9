// tb_weight_ring: load random weights, then rotate through several full
// turns and check that each rotation step delivers the next synapse's weight
// one cycle later and that the pointer wraps from N-1 back to 0.
module tb_weight_ring;
  localparam int N = 13, W_W = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rot;
  logic [$clog2(N+1)-1:0] wr_addr, ptr;
  logic signed [W_W-1:0] wr_data, w_out;
  weight_ring #(.N(N), .W_W(W_W)) dut (.*);

  int checks = 0, failures = 0;
  int w[N];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expect_idx;
    wr_en = 0; rot = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (w[i]) begin
      w[i] = int'($urandom_range(0, 63)) - 32;
      @(negedge clk); wr_en = 1; wr_addr = ($clog2(N+1))'(i); wr_data = W_W'(w[i]);
    end
    @(negedge clk) wr_en = 0;
    check(ptr == 0, "pointer starts at synapse 0");
    expect_idx = 0;
    for (int s = 0; s < 5 * N; s++) begin
      @(negedge clk);
      rot = ($urandom_range(0, 3) != 0);
      if (rot) begin
        check(ptr == ($clog2(N+1))'(expect_idx), $sformatf("ptr %0d expected %0d", ptr, expect_idx));
        @(negedge clk);
        rot = 0;
        check(w_out == W_W'(w[expect_idx]), $sformatf("step %0d: w %0d expected %0d", s, w_out, w[expect_idx]));
        expect_idx = (expect_idx + 1) % N;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
