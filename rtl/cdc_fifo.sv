// cdc_fifo: asynchronous FIFO between two unrelated clocks.
//
// Used where the receiver's diagnostic path hands samples to the slower
// channelizer clock, and where the sequencer receives serial-link symbols
// from the transceiver clock. Pointers are kept in binary in their own
// domain and passed across in Gray code through two-flop synchronisers, so
// full and empty are conservative: full is seen late by the reader and
// empty late by the writer, never wrongly asserted as false. The structure is
// the textbook one; the paper only names the FIFO.
//
// Interface: write side wr_en / wr_data / full in wr_clk; read side is
// first-word-fall-through: rd_data is valid whenever empty is low, rd_en
// pops it. Each side has its own synchronous reset; both must be applied.
module cdc_fifo #(
  parameter int unsigned WIDTH      = 16,
  parameter int unsigned DEPTH_LOG2 = 4
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;
  typedef logic [DEPTH_LOG2:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];
  ptr_t wbin, wgray, rbin, rgray;
  ptr_t rgray_w1, rgray_w2;   // read pointer seen in the write domain
  ptr_t wgray_r1, wgray_r2;   // write pointer seen in the read domain

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  ptr_t wbin_next;
  assign wbin_next = wbin + ptr_t'(1);
  assign full = (wgray == {~rgray_w2[DEPTH_LOG2:DEPTH_LOG2-1], rgray_w2[DEPTH_LOG2-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin_next;
        wgray <= bin2gray(wbin_next);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin[DEPTH_LOG2-1:0]] <= wr_data;
  end

  // read domain
  ptr_t rbin_next;
  assign rbin_next = rbin + ptr_t'(1);
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[DEPTH_LOG2-1:0]];

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin_next;
        rgray <= bin2gray(rbin_next);
      end
    end
  end

endmodule
