// instr_buffer: holds the instruction sequence the host sends to SoftMC.
//
// The host composes a test program, ends it with an END instruction and
// sends it in one go; the hardware then runs it. This buffer is where the
// program waits. It is a first-word-fall-through FIFO of instr_t words plus
// a count of END instructions held: prog_ready rises once a complete program
// (one ending in END) is stored, so the sequencer never starts a program the
// host has only half sent and the command timing stays exactly as
// programmed. A program longer than the buffer cannot hold an END while the
// buffer is full, so a full buffer also raises prog_ready and the program is
// then streamed; the sequencer flags an underrun if the host falls behind.
//
// Interface: in_valid/in_ready/in_instr is a valid/ready stream (a word moves
// when both are high). head_valid/head_instr show the oldest word; pop
// removes it at the next clock edge. Buffering and the END-gated start follow
// from the SoftMC programming model; the depth, the FIFO organisation and the
// full-buffer streaming rule are this design's choices.
module instr_buffer
  import softmc_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  instr_t                 in_instr,
  output logic                   head_valid,
  output instr_t                 head_instr,
  input  logic                   pop,
  output logic                   prog_ready,
  output logic [$clog2(DEPTH):0] level
);
  logic               full, push, do_pop;
  logic [INSTR_W-1:0] head_bits;
  logic [$clog2(DEPTH):0] end_count;

  sync_fifo #(.WIDTH(INSTR_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(push), .wr_data(in_instr), .full,
    .rd_en(pop), .rd_valid(head_valid), .rd_data(head_bits), .level
  );

  assign head_instr = instr_t'(head_bits);
  assign in_ready   = !full;
  assign push       = in_valid && !full;
  assign do_pop     = pop && head_valid;
  assign prog_ready = (end_count != '0) || full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) end_count <= '0;
    else end_count <= end_count
                      + (($clog2(DEPTH)+1)'(push   && in_instr.op   == OP_END))
                      - (($clog2(DEPTH)+1)'(do_pop && head_instr.op == OP_END));
  end

  // The host must hold a word steady while it waits for in_ready.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_instr));
endmodule
