// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used as the command queue of each sequencer output engine, as the
// sequencer's instruction look-ahead buffer and as the serial-link data
// queue. rd_data shows the oldest entry whenever empty is low; rd_en pops
// it. A write and a read in the same clock are both taken. count is the
// number of stored entries. flush empties the FIFO at once.
module sync_fifo #(
  parameter int unsigned WIDTH      = 56,
  parameter int unsigned DEPTH_LOG2 = 5
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  flush,
  input  logic                  wr_en,
  input  logic [WIDTH-1:0]      wr_data,
  output logic                  full,
  input  logic                  rd_en,
  output logic [WIDTH-1:0]      rd_data,
  output logic                  empty,
  output logic [DEPTH_LOG2:0]   count
);

  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;

  logic [WIDTH-1:0]      mem [DEPTH];
  logic [DEPTH_LOG2-1:0] wp, rp;

  assign full    = (count == (DEPTH_LOG2+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (DEPTH_LOG2+1)'(do_wr) - (DEPTH_LOG2+1)'(do_rd);
    end
  end

endmodule
