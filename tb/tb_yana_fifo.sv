// tb_yana_fifo: random push/pop traffic against a queue reference model.
// Checks every popped word, the fill count and the full/empty flags.
module tb_yana_fifo;
  localparam int W = 12, D = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int n_full = 0;

  yana_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phases: fill-biased, drain-biased, balanced
      int bias = (cyc / 500) % 3;
      @(negedge clk);
      in_valid  = ($urandom_range(0, 9) < (bias == 0 ? 8 : bias == 1 ? 2 : 5));
      out_ready = ($urandom_range(0, 9) < (bias == 1 ? 8 : bias == 0 ? 2 : 5));
      in_data   = W'($urandom);
      // combinational checks against the model
      check(count == q.size(), "count");
      check(out_valid == (q.size() != 0), "out_valid");
      check(in_ready == (q.size() != D), "in_ready");
      if (q.size() == D) n_full++;
      if (out_valid && q.size() != 0) check(out_data == q[0], "data order");
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(n_full > 10, "FIFO reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
