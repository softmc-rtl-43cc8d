// sync_fifo: single-clock first-word-fall-through FIFO, shared by the
// instruction buffer and the read-back buffer.
//
// Storage is a plain array of DEPTH words with binary read and write
// pointers; the head word is read combinationally, so rd_data is valid in
// the same cycle rd_valid is high and a pop takes effect at the next edge.
// A push into a full FIFO and a pop from an empty one are ignored; the
// wrappers decide whether that is an error. `level` is the number of
// stored words. DEPTH must be a power of two. Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic                     rd_valid,
  output logic [WIDTH-1:0]         rd_data,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign level    = wr_ptr - rd_ptr;
  assign full     = (level == (AW+1)'(DEPTH));
  assign rd_valid = (level != '0);
  assign rd_data  = mem[rd_ptr[AW-1:0]];
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_en && rd_valid;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
