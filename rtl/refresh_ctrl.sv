// refresh_ctrl: SoftMC's auto-refresh engine.
//
// With auto-refresh enabled, the FPGA refreshes the DRAM by itself every
// tREFI cycles, tREFI being a value the user sets; with it disabled the test
// program alone decides when rows are refreshed (e.g. a retention test that
// must leave rows untouched for a chosen interval). Both modes and the
// programmable tREFI follow SoftMC.
//
// How it works (this design's choice): an interval counter produces one
// refresh request every cfg_trefi cycles. Requests are counted in `pending`
// (saturating at MAX_PENDING, the number of refreshes DDR3 lets a controller
// postpone) because they are only served while no test program runs, so
// that refresh never disturbs a program's timing. When the command bus is
// free the engine issues PRECHARGE-ALL (rows a program left open are
// closed), waits cfg_trp cycles, then issues one REFRESH per pending request,
// cfg_trfc cycles apart, and releases the bus cfg_trfc cycles after the last
// one. Disabling clears the counter and the pending requests; a sequence
// already started is finished.
//
// Interface: `want` asks the sequencer to hold off; `busy` means `cmd` owns
// the command bus; `cmd` is registered and carries only the command type
// (PREA and REF need no bank or address). Spacing: PREA->REF = cfg_trp,
// REF->REF and REF->release = cfg_trfc (values of 0 act as 1).
module refresh_ctrl
  import softmc_pkg::*;
#(
  parameter int unsigned MAX_PENDING = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_enable,
  input  logic [31:0] cfg_trefi,
  input  logic [7:0]  cfg_trp,
  input  logic [15:0] cfg_trfc,
  input  logic        bus_free,
  output logic        want,
  output logic        busy,
  output ddr_cmd_e    cmd
);
  typedef enum logic [1:0] {R_IDLE, R_PRE_WAIT, R_RFC_WAIT} rstate_e;
  localparam int unsigned PW = $clog2(MAX_PENDING + 1);

  rstate_e     state;
  logic [31:0] interval_cnt;
  logic [15:0] gap_cnt;
  logic [PW-1:0] pending;
  logic        tick, issue_ref;

  assign tick = cfg_enable && (interval_cnt + 32'd1 >= cfg_trefi);
  assign want = cfg_enable && (pending != '0);
  assign busy = (state != R_IDLE);
  // A REFRESH is issued at this edge (consumes one pending request).
  assign issue_ref = (gap_cnt == '0) && (pending != '0) &&
                     ((state == R_PRE_WAIT) || (state == R_RFC_WAIT && cfg_enable));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      interval_cnt <= '0;
      pending      <= '0;
    end else if (!cfg_enable) begin
      interval_cnt <= '0;
      pending      <= '0;
    end else begin
      interval_cnt <= tick ? '0 : interval_cnt + 32'd1;
      if (tick && !issue_ref && pending != PW'(MAX_PENDING)) pending <= pending + 1'b1;
      else if (!tick && issue_ref)                             pending <= pending - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= R_IDLE;
      gap_cnt <= '0;
      cmd     <= CMD_NOP;
    end else begin
      cmd <= CMD_NOP;
      unique case (state)
        R_IDLE: begin
          if (want && bus_free) begin
            cmd     <= CMD_PREA;
            gap_cnt <= (cfg_trp == '0) ? '0 : 16'(cfg_trp) - 16'd1;
            state   <= R_PRE_WAIT;
          end
        end
        R_PRE_WAIT, R_RFC_WAIT: begin
          if (gap_cnt != '0) begin
            gap_cnt <= gap_cnt - 16'd1;
          end else if (issue_ref) begin
            cmd     <= CMD_REF;
            gap_cnt <= (cfg_trfc == '0) ? '0 : cfg_trfc - 16'd1;
            state   <= R_RFC_WAIT;
          end else begin
            state <= R_IDLE;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  a_pending_bound: assert property (@(posedge clk) disable iff (!rst_n)
    pending <= PW'(MAX_PENDING));
endmodule
