// softmc_top: the FPGA side of SoftMC, a programmable DDR3 memory controller
// for DRAM characterisation.
//
// The host sends a test program (a sequence of 64-bit instructions, see
// softmc_pkg) over its link; the controller buffers it, and once the END
// instruction has arrived it issues the program's DDR commands in order,
// one per command-clock cycle, separated by exactly the idle cycles the
// program's WAIT instructions request. No timing rule is enforced by the
// hardware: shortened tRCD/tRAS, missing refreshes and unusual command
// orders are exactly what a characterisation run needs to produce. Data
// returned by READ commands is queued for the host. Between programs an
// optional auto-refresh engine refreshes the DRAM every cfg_trefi cycles;
// with it disabled, refresh is entirely up to the program.
//
//   host link --> instr_buffer --> instr_sequencer --+
//                                                    +--> command mux --> DDR3 pin encoding --> PHY
//                          refresh_ctrl -------------+
//   host link <-- readback_buffer <-- PHY read data
//
// Ports. Host side: host_instr_* is the instruction stream (valid/ready),
// host_rd_* the read-data stream, cfg_* the auto-refresh settings the host
// writes, status outputs report a running program, program completion and the
// sticky error flags (cleared by err_clear) and the fill levels of both buffers. PHY side: every cycle ddr_cmd
// carries the DDR3 command/address pin values for one command slot, and on a
// WRITE ddr_wr_en is high with the burst's data on ddr_wdata (the write
// pattern byte repeated over all 8 beats of the 64-bit bus); the PHY applies
// the write latency. ddr_cke is the clock-enable pin, set by CKE
// instructions; while a program leaves it low (power-down or self-refresh)
// the auto-refresh engine stays off the bus. phy_rd_valid/phy_rd_data return
// one burst per READ.
//
// The split into host software, FPGA controller, link and DRAM, the
// instruction set, in-order issue with program-defined timing and the
// switchable auto-refresh with programmable tREFI follow SoftMC. The link
// (PCIe) and the DDR3 PHY are not part of this RTL. One command per clock
// (the controller clock equals the DRAM command clock), the byte-pattern
// write data and the refresh-between-programs policy are this design's
// choices.
module softmc_top
  import softmc_pkg::*;
#(
  parameter int unsigned INSTR_DEPTH = 1024,
  parameter int unsigned RB_DEPTH    = 512,
  parameter int unsigned MAX_PENDING_REF = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  // host link: instructions in
  input  logic               host_instr_valid,
  output logic               host_instr_ready,
  input  logic [INSTR_W-1:0] host_instr,
  // host link: read data out
  output logic               host_rd_valid,
  input  logic               host_rd_ready,
  output logic [BURST_W-1:0] host_rd_data,
  // configuration
  input  logic               cfg_refresh_en,
  input  logic [31:0]        cfg_trefi,
  input  logic [7:0]         cfg_trp,
  input  logic [15:0]        cfg_trfc,
  input  logic               err_clear,
  // status
  output logic               prog_busy,
  output logic               prog_done,
  output logic               refresh_busy,
  output logic               err_underrun,
  output logic               err_overflow,
  output logic [$clog2(INSTR_DEPTH):0] instr_level,
  output logic [$clog2(RB_DEPTH):0]    rb_level,
  // DDR3 PHY
  output ddr_pins_t          ddr_cmd,
  output logic               ddr_cke,
  output logic               ddr_wr_en,
  output logic [BURST_W-1:0] ddr_wdata,
  input  logic               phy_rd_valid,
  input  logic [BURST_W-1:0] phy_rd_data
);
  logic     head_valid, pop, prog_ready, ref_want, ref_busy;
  instr_t   head_instr;
  ddr_req_t seq_cmd, bus_cmd;
  ddr_cmd_e ref_cmd;

  instr_buffer #(.DEPTH(INSTR_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .in_valid(host_instr_valid), .in_ready(host_instr_ready), .in_instr(instr_t'(host_instr)),
    .head_valid, .head_instr, .pop,
    .prog_ready, .level(instr_level)
  );

  instr_sequencer u_seq (
    .clk, .rst_n,
    .prog_ready, .hold(ref_busy || (ref_want && ddr_cke)),
    .head_valid, .head_instr, .pop,
    .cmd(seq_cmd), .busy(prog_busy), .done(prog_done),
    .underrun(err_underrun), .clear_err(err_clear), .cke(ddr_cke)
  );

  refresh_ctrl #(.MAX_PENDING(MAX_PENDING_REF)) u_ref (
    .clk, .rst_n,
    .cfg_enable(cfg_refresh_en), .cfg_trefi, .cfg_trp, .cfg_trfc,
    .bus_free(!prog_busy && ddr_cke),
    .want(ref_want), .busy(ref_busy), .cmd(ref_cmd)
  );

  readback_buffer #(.DEPTH(RB_DEPTH), .WIDTH(BURST_W)) u_rb (
    .clk, .rst_n,
    .in_valid(phy_rd_valid), .in_data(phy_rd_data),
    .out_valid(host_rd_valid), .out_ready(host_rd_ready), .out_data(host_rd_data),
    .overflow(err_overflow), .clear_err(err_clear), .level(rb_level)
  );

  // A pending refresh holds back the next program only while CKE is high;
  // with CKE low the refresh engine cannot run, and the program that raises
  // CKE again must go first.
  // Command mux: the refresh engine owns the bus only while no program runs,
  // so at most one of the two sources drives a command in any cycle.
  assign bus_cmd      = ref_busy ? '{cmd: ref_cmd, bank: '0, addr: '0, pattern: '0} : seq_cmd;
  assign refresh_busy = ref_busy;
  assign ddr_cmd      = encode_cmd(bus_cmd);
  assign ddr_wr_en    = (bus_cmd.cmd == CMD_WR);
  assign ddr_wdata    = {(BURST_W/8){bus_cmd.pattern}};

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
    !(ref_busy && prog_busy));
  a_no_lost_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    ref_busy |-> seq_cmd.cmd == CMD_NOP);
endmodule
