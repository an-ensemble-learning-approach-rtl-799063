// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used twice in every base learner: as the feature FIFO that holds the
// per-state feature vectors waiting for the decision tree, and as the result
// FIFO that lines up the per-invocation results of learners that finish at
// different times.  The head entry is visible on rd_data whenever empty is
// low; rd_en pops it.  A write while full is dropped and reported by
// overflow for one cycle, so the caller can keep a sticky error flag.
//
// Storage is a plain array (block or distributed RAM), indexed by wrapping
// pointers with one extra bit to tell full from empty.  DEPTH must be a
// power of two.  Both the FIFOs and their placement follow the paper; the
// depth and the drop-on-full behaviour are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             overflow,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign count    = wr_ptr - rd_ptr;
  assign empty    = (wr_ptr == rd_ptr);
  assign full     = (count == (AW+1)'(DEPTH));
  assign do_wr    = wr_en && !full;
  assign do_rd    = rd_en && !empty;
  assign overflow = wr_en && full;
  assign rd_data  = mem[rd_ptr[AW-1:0]];

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

  // A pop of an empty FIFO is a protocol error of the reader.
  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");

endmodule
