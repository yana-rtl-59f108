// tb_yana_axis_buffer: AXI4-Stream writes and reads with random tvalid and
// tready, checking order, fill level and full-buffer backpressure.
module tb_yana_axis_buffer;
  localparam int W = 32, D = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic s_axis_tvalid, s_axis_tready, m_axis_tvalid, m_axis_tready;
  logic [W-1:0] s_axis_tdata, m_axis_tdata;
  logic [$clog2(D+1)-1:0] fill;
  int checks = 0, failures = 0, n_full = 0;
  bit s_acc = 0;
  logic [W-1:0] q[$];

  yana_axis_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_axis_tvalid = 0; m_axis_tready = 0; s_axis_tdata = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      if (!s_axis_tvalid || s_acc) begin
        s_axis_tvalid = ($urandom_range(0, 9) < ((cyc / 300) % 2 ? 8 : 3));
        s_axis_tdata  = $urandom;
      end
      m_axis_tready = ($urandom_range(0, 9) < ((cyc / 300) % 2 ? 2 : 8));
      #1;
      check(fill == q.size(), "fill");
      check(s_axis_tready == (q.size() < D), "tready");
      if (q.size() == D) n_full++;
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        check(q.size() > 0 && m_axis_tdata == q[0], "order");
        if (q.size() > 0) void'(q.pop_front());
      end
      s_acc = s_axis_tvalid && s_axis_tready;
      if (s_acc) q.push_back(s_axis_tdata);
    end
    check(n_full > 10, "buffer was full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
