// readback_buffer: collects the data that READ commands return from the DRAM
// and passes it to the host, which fetches it after the program has run.
//
// Each READ returns one burst (BURST_W bits, 8 beats of the 64-bit bus) from
// the PHY, marked by in_valid; bursts are stored in arrival order, which is
// the order the READs were issued. The host drains the buffer through the
// out_valid/out_ready stream. The controller never delays a READ to make
// room, because that would change the command timing under test; instead a
// burst that arrives while the buffer is full is dropped and the sticky
// `overflow` flag is raised (cleared by clear_err), so the host knows the
// returned data is incomplete.
//
// Returning read data to the host follows SoftMC; the buffer, its depth and
// the overflow policy are this design's choices. Latency: a burst accepted at
// edge k is visible on out_data after edge k.
module readback_buffer
  import softmc_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = BURST_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [WIDTH-1:0]       in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [WIDTH-1:0]       out_data,
  output logic                   overflow,
  input  logic                   clear_err,
  output logic [$clog2(DEPTH):0] level
);
  logic full;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(in_valid), .wr_data(in_data), .full,
    .rd_en(out_ready), .rd_valid(out_valid), .rd_data(out_data), .level
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 overflow <= 1'b0;
    else if (in_valid && full)  overflow <= 1'b1;
    else if (clear_err)         overflow <= 1'b0;
  end
endmodule
