// instr_sequencer: executes a SoftMC program, issuing DDR commands in
// program order with the spacing the program specifies.
//
// SoftMC leaves all DRAM timing to the test program: the hardware imposes no
// timing constraint of its own and never reorders commands, so a program may
// use any command order and any (also illegal, shortened) delay. This block
// reads instructions from the head of the instruction buffer, one per clock:
//   ACT/RD/WR/PRE/PREA/REF/RAW  drive that command for one cycle;
//   CKE                     set the registered `cke` output to pattern[0]
//                           (one idle command cycle);
//   WAIT n                  drive NOPs so that the next command is issued n
//                           cycles after the previous one (n < 2 acts as 2,
//                           since the WAIT word itself takes one cycle);
//   END                     finish the program and pulse `done`.
// Back-to-back command instructions therefore issue on consecutive cycles,
// and "cmd; WAIT tRCD; cmd" spaces the two commands by exactly tRCD cycles,
// which is how the API's genWAIT(tRCD) is meant.
//
// A program starts when prog_ready is high and `hold` is low; `hold` lets the
// auto-refresh engine finish first. busy is high from start until END.
// If the buffer runs dry before END (only possible for a program streamed
// through a full buffer) NOPs are driven and the sticky `underrun` flag is
// set, because the programmed timing has then been broken. clear_err clears it.
//
// Timing: `cmd` is registered; an instruction popped at edge k appears on
// `cmd` after edge k. In-order issue and programmed spacing follow SoftMC;
// the one-instruction-per-cycle rule, the WAIT arithmetic and the underrun
// flag are this design's choices. `cke` resets high: the DRAM is assumed to
// have been initialised (by the PHY's start-up logic) before programs run.
module instr_sequencer
  import softmc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      prog_ready,
  input  logic      hold,
  input  logic      head_valid,
  input  instr_t    head_instr,
  output logic      pop,
  output ddr_req_t  cmd,
  output logic      busy,
  output logic      done,
  output logic      underrun,
  input  logic      clear_err,
  output logic      cke
);
  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e            state;
  logic [WAIT_W-1:0] wait_cnt;

  assign busy = (state == S_RUN);
  assign pop  = (state == S_RUN) && (wait_cnt == '0) && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
      cmd      <= REQ_NOP;
      done     <= 1'b0;
      underrun <= 1'b0;
      cke      <= 1'b1;
    end else begin
      cmd  <= REQ_NOP;
      done <= 1'b0;
      if (clear_err) underrun <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (prog_ready && !hold) state <= S_RUN;
        end
        S_RUN: begin
          if (wait_cnt != '0) begin
            wait_cnt <= wait_cnt - 1'b1;
          end else if (head_valid) begin
            unique case (head_instr.op)
              OP_END: begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
              OP_WAIT: begin
                wait_cnt <= (head_instr.cycles > WAIT_W'(2)) ? head_instr.cycles - WAIT_W'(2) : '0;
              end
              OP_CKE: begin
                cke <= head_instr.pattern[0];
              end
              default: begin
                cmd.cmd     <= op_to_cmd(head_instr.op);
                cmd.bank    <= head_instr.bank;
                cmd.addr    <= head_instr.addr;
                cmd.pattern <= head_instr.pattern;
              end
            endcase
          end else begin
            underrun <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // At most one command per cycle is popped, and only while running.
  a_pop_only_running: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> busy && head_valid);
endmodule
