// yana_control_unit: control unit (CU) of the three-core deployment. It
// parses 64-bit commands from the command buffer, runs a state machine over
// them and keeps the global timestep that all cores share.
//
// Commands (yana_pkg::command_t, encoding of this implementation):
//   OP_RESET  pulse the data-path reset of all cores, set the timestep to 0
//             and wait until every core has finished its clearing sweep.
//   OP_WRITE  write `data` to `addr` of memory `mem` of core `core`
//             (0 input multicast, 1 hidden, 2 output), one cycle.
//   OP_RUN    dataset-sample mode: for the current timestep t, forward every
//             input event at the head of the input buffer whose timestamp is
//             not later than t to the multicast core; then wait until all
//             cores are done, and advance t. Ends after `data` timesteps have
//             been processed and pushes {RES_RUN_DONE, cycles} to the result
//             buffer. The input buffer must hold the sample sorted by
//             timestamp. No wall-clock time is waited for: a timestep lasts
//             as long as its work.
//   OP_READ   read the potential of output-core neuron `addr` and push
//             {RES_POTENTIAL, neuron, u} to the result buffer.
// Unknown opcodes are skipped.
//
// The CU's three jobs (time sync, instruction parsing, state machine) and the
// timestamp-driven timestep progression follow the published system; the
// command set and word layouts are this implementation's.
module yana_control_unit
  import yana_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  // command buffer
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  command_t            cmd_data,
  // input event buffer
  input  logic                in_valid,
  output logic                in_ready,
  input  in_word_t            in_data,
  // result buffer
  output logic                res_valid,
  input  logic                res_ready,
  output logic [31:0]         res_data,
  // cores
  output ts_t                 timestep,
  output logic                core_reset,
  output mem_wr_t             mems_data,
  output logic [N_MEMS-1:0]   mems_wena_input,
  output logic [N_MEMS-1:0]   mems_wena_hidden,
  output logic [N_MEMS-1:0]   mems_wena_output,
  output logic                src_valid,
  input  logic                src_ready,
  output logic [NEURON_W-1:0] src_id,
  input  logic                all_done,
  output logic                rd_req,
  output logic [NEURON_W-1:0] rd_addr,
  input  logic                rd_ack,
  input  logic                rd_valid,
  input  u_t                  rd_data,
  output logic                busy,
  output logic                ts_advance
);
  typedef enum logic [2:0] {
    S_FETCH, S_RESET_WAIT, S_FEED, S_WAIT, S_READ, S_READ_WAIT, S_PUSH
  } state_e;

  state_e      state;
  command_t    cmd;
  ts_t         t_end;
  logic [27:0] cycles;
  logic        feeding, settle;

  assign cmd_ready = (state == S_FETCH);
  assign busy      = (state != S_FETCH);
  assign feeding   = (state == S_FEED) && in_valid && (in_data.ts <= timestep);
  assign src_valid = feeding;
  assign src_id    = NEURON_W'(in_data.src);
  assign in_ready  = feeding && src_ready;
  assign rd_req    = (state == S_READ);
  assign rd_addr   = cmd.addr[NEURON_W-1:0];
  assign ts_advance = (state == S_WAIT) && !settle && all_done &&
                      (timestep + 1'b1 < t_end);

  function automatic logic [N_MEMS-1:0] wena_for(input command_t c,
                                                 input logic [CORE_W-1:0] id);
    return (c.core == id) ? (N_MEMS'(1) << c.mem) : '0;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state            <= S_FETCH;
      cmd              <= '0;
      t_end            <= '0;
      cycles           <= '0;
      settle           <= 1'b0;
      timestep         <= '0;
      core_reset       <= 1'b1;
      mems_data        <= '0;
      mems_wena_input  <= '0;
      mems_wena_hidden <= '0;
      mems_wena_output <= '0;
      res_valid        <= 1'b0;
      res_data         <= '0;
    end else begin
      core_reset       <= 1'b0;
      mems_wena_input  <= '0;
      mems_wena_hidden <= '0;
      mems_wena_output <= '0;
      if (busy && cycles != '1) cycles <= cycles + 1'b1;
      case (state)
        S_FETCH: if (cmd_valid) begin
          cmd <= cmd_data;
          case (cmd_data.op)
            OP_RESET: begin
              core_reset <= 1'b1;
              timestep   <= '0;
              settle     <= 1'b1;
              state      <= S_RESET_WAIT;
            end
            OP_WRITE: begin
              mems_data        <= '{addr: cmd_data.addr, data: cmd_data.data};
              mems_wena_input  <= wena_for(cmd_data, ID_INPUT);
              mems_wena_hidden <= wena_for(cmd_data, ID_HIDDEN);
              mems_wena_output <= wena_for(cmd_data, ID_OUTPUT);
            end
            OP_RUN: begin
              t_end  <= cmd_data.data[TS_W-1:0] + timestep;
              cycles <= '0;
              state  <= S_FEED;
            end
            OP_READ: state <= S_READ;
            default: ;
          endcase
        end
        S_RESET_WAIT: begin
          settle <= 1'b0;
          if (!settle && all_done) state <= S_FETCH;
        end
        S_FEED: if (!feeding) begin
          settle <= 1'b1;
          state  <= S_WAIT;
        end
        S_WAIT: begin
          settle <= 1'b0;
          if (!settle && all_done) begin
            if (timestep + 1'b1 < t_end) begin
              timestep <= timestep + 1'b1;
              state    <= S_FEED;
            end else begin
              res_valid <= 1'b1;
              res_data  <= {RES_RUN_DONE, cycles};
              state     <= S_PUSH;
            end
          end
        end
        S_READ: if (rd_ack) state <= S_READ_WAIT;
        S_READ_WAIT: if (rd_valid) begin
          res_valid <= 1'b1;
          res_data  <= {RES_POTENTIAL, 12'(cmd.addr), rd_data};
          state     <= S_PUSH;
        end
        S_PUSH: if (res_ready) begin
          res_valid <= 1'b0;
          state     <= S_FETCH;
        end
        default: state <= S_FETCH;
      endcase
    end
  end
endmodule
