// tb_yana_control_unit: the control unit against a stand-in for the cores
// (random busy time after every input event, timestep change and reset; a
// read-out port answering with a known function of the address). Checks the
// decoding of WRITE (one-cycle write enable on the addressed core and memory
// only), RESET (reset pulse, timestep 0, waits for done), RUN (events leave
// only when their timestamp is due, in order, the timestep advances only when
// all cores are done, the run ends with a RUN_DONE word after the requested
// number of timesteps) and READ (potential word).
module tb_yana_control_unit;
  import yana_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, in_valid, in_ready, res_valid, res_ready;
  command_t cmd_data;
  in_word_t in_data;
  logic [31:0] res_data;
  ts_t timestep;
  logic core_reset, src_valid, src_ready, all_done, rd_req, rd_ack, rd_valid, busy, ts_advance;
  mem_wr_t mems_data;
  logic [N_MEMS-1:0] mems_wena_input, mems_wena_hidden, mems_wena_output;
  logic [NEURON_W-1:0] src_id, rd_addr;
  u_t rd_data;
  int checks = 0, failures = 0;

  yana_control_unit dut (.*);

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

  // ---------------------------------------------------- core stand-in
  int busy_cnt = 0;
  ts_t ts_prev = 0;
  bit done_prev = 1;
  in_word_t ev_q[$];       // what the host put in the input buffer
  int n_fed = 0, n_adv = 0, n_wr = 0;
  assign all_done = (busy_cnt == 0);
  assign in_valid = ev_q.size() > 0;
  assign in_data  = (ev_q.size() > 0) ? ev_q[0] : '0;
  always @(negedge clk) src_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    done_prev <= all_done;
    ts_prev   <= timestep;
    if (!rst && timestep != ts_prev) begin
      check(done_prev && timestep == ts_prev + 1'b1, "timestep advances by one only when done");
      n_adv++;
    end
    if (src_valid && src_ready) begin
      check(in_valid && in_data.ts <= timestep && src_id == NEURON_W'(in_data.src),
            "event fed when due, in order");
      check(in_ready, "input popped with the handshake");
      n_fed++;
    end
    if (in_valid && in_ready) void'(ev_q.pop_front());
    if (core_reset) busy_cnt <= 20;
    else if (src_valid && src_ready) busy_cnt <= $urandom_range(1, 6);
    else if (timestep != ts_prev) busy_cnt <= $urandom_range(0, 5);
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (!rst && |{mems_wena_input, mems_wena_hidden, mems_wena_output}) n_wr++;
  end
  // read-out: ack after a few cycles, data two cycles later = 3*addr - 7
  initial begin
    rd_ack = 0; rd_valid = 0; rd_data = 0;
    forever begin
      @(negedge clk);
      if (rd_req) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        rd_ack = 1; @(negedge clk); rd_ack = 0;
        @(negedge clk); rd_valid = 1; rd_data = u_t'(3 * int'(rd_addr) - 7);
        @(negedge clk); rd_valid = 0;
      end
    end
  end

  // ---------------------------------------------------- host
  logic [31:0] res_q[$];
  always @(posedge clk) if (res_valid && res_ready) res_q.push_back(res_data);
  always @(negedge clk) res_ready <= ($urandom_range(0, 1) == 0);

  task automatic command(input opcode_e op, input int core, input mem_sel_e m, input int a, input longint d);
    @(negedge clk);
    cmd_valid = 1;
    cmd_data = '{op: op, core: CORE_W'(core), mem: m, rsvd: '0, addr: SYNAPSE_W'(a), data: MEM_DATA_W'(d)};
    forever begin #1; if (cmd_ready) break; @(negedge clk); end
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  initial begin
    cmd_valid = 0; cmd_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // WRITE: one cycle, right core and memory
    for (int c = 0; c < 3; c++) begin
      mem_sel_e m;
      m = mem_sel_e'(c + 1);
      command(OP_WRITE, c, m, 100 + c, 64'h5_0000_0000 + c);
      @(negedge clk);
      check(mems_data.addr == SYNAPSE_W'(100 + c) && mems_data.data == MEM_DATA_W'(64'h5_0000_0000 + c), "write data");
      check(mems_wena_input  == ((c == 0) ? N_MEMS'(1) << m : '0) &&
            mems_wena_hidden == ((c == 1) ? N_MEMS'(1) << m : '0) &&
            mems_wena_output == ((c == 2) ? N_MEMS'(1) << m : '0), "write enable decode");
      @(negedge clk);
      check(mems_wena_input == 0 && mems_wena_hidden == 0 && mems_wena_output == 0, "one-cycle write");
    end
    // RESET
    command(OP_RESET, 0, MEM_WEIGHT, 0, 0);
    #2 check(core_reset && timestep == 0, "reset pulse");
    while (busy) @(negedge clk);
    check(all_done, "reset waits for done");
    // RUN on a sample: events at timesteps 0,0,1,3,3,3,7
    begin
      int ts_list[7] = '{0, 0, 1, 3, 3, 3, 7};
      for (int k = 0; k < 7; k++) ev_q.push_back('{ts: 16'(ts_list[k]), src: 16'(k * 5)});
    end
    command(OP_RUN, 0, MEM_WEIGHT, 0, 10);
    while (busy) @(negedge clk);
    check(n_fed == 7 && ev_q.size() == 0, "all events fed");
    check(timestep == 9 && n_adv == 9, $sformatf("ran 10 timesteps (ts=%0d adv=%0d)", timestep, n_adv));
    repeat (4) @(negedge clk);
    check(res_q.size() == 1 && res_q[0][31:28] == RES_RUN_DONE && res_q[0][27:0] > 20, "run-done word");
    res_q.delete();
    // READ
    command(OP_READ, 2, MEM_WEIGHT, 77, 0);
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    check(res_q.size() == 1 && res_q[0] == {RES_POTENTIAL, 12'd77, 16'(3 * 77 - 7)}, "potential word");
    check(n_wr == 3, $sformatf("exactly three writes (%0d)", n_wr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
