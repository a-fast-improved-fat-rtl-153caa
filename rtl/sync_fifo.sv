// sync_fifo: readout FIFO of one TDC channel.
//
// Words written by the hit recorder wait here until the readout takes them.
// It is a single-clock FIFO over a DEPTH-word memory with read and write
// pointers one bit wider than the address, so full and empty are told apart.
// Reads are first-word-fall-through: rd_data shows the oldest word whenever
// empty is low, and rd_en pops it at the clock edge.
//
// Interface: wr_en/wr_data/full, rd_en/rd_data/empty, count of stored words;
// synchronous active-high reset empties it. Writing when full or reading when
// empty is a protocol error (checked by assertions). The paper names the
// readout FIFO only; depth, width and read timing are this design's choices
// (256 words = 16 recorded hits of 16 words).
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;

  assign count   = wr_ptr - rd_ptr;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wr_ptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (wr_en && !full) wr_ptr <= wr_ptr + 1'b1;
      if (rd_en && !empty) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (rst) !(wr_en && full))
    else $error("sync_fifo: write while full");
  a_no_read_when_empty: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty))
    else $error("sync_fifo: read while empty");

  initial begin
    assert (DEPTH == (1 << AW)) else $error("sync_fifo: DEPTH must be a power of two");
  end

endmodule
