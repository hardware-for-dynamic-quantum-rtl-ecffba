// link_rx: sequencer end of the serial link from the trigger distribution
// module.
//
// Symbols (a K flag and a byte, as the transceiver decodes them) arrive in
// the transceiver's clock. Everything except idle fill crosses into the
// sequencer clock through an asynchronous FIFO; there the reserved trigger
// symbol becomes a one-clock trigger pulse for the output engines, and each
// data byte (a word of qubit measurement results) is queued for the
// sequencer's LOAD_CMP instruction. Moving the data through asynchronous
// FIFOs and signalling triggers with a reserved symbol follow the system
// this models; the symbol codes (aps2_pkg) and the queue depth are this
// design's choices. Other K symbols are dropped.
//
// Timing: a symbol needs the FIFO's synchroniser delay (about three
// sequencer clocks) plus one clock to reach trigger_o or cmp_valid_o.
module link_rx
  import aps2_pkg::*;
#(
  parameter int unsigned QDEPTH_LOG2 = 4
) (
  input  logic        link_clk,
  input  logic        link_rst,
  input  logic        sym_valid,
  input  link_sym_t   sym,
  input  logic        clk,
  input  logic        rst,
  output logic        trigger_o,
  output logic        cmp_valid_o,
  output logic [7:0]  cmp_data_o,
  input  logic        cmp_pop_i,
  output logic        overflow_o
);

  logic      a_full, a_empty;
  link_sym_t a_dout;

  cdc_fifo #(.WIDTH(9), .DEPTH_LOG2(4)) u_cdc (
    .wr_clk(link_clk), .wr_rst(link_rst),
    .wr_en(sym_valid && !(sym.k && sym.data == K_IDLE)), .wr_data(sym), .full(a_full),
    .rd_clk(clk), .rd_rst(rst), .rd_en(!a_empty), .rd_data(a_dout), .empty(a_empty)
  );

  logic q_full, q_empty;
  logic is_data;
  assign is_data = !a_empty && !a_dout.k;

  sync_fifo #(.WIDTH(8), .DEPTH_LOG2(QDEPTH_LOG2)) u_q (
    .clk, .rst, .flush(1'b0), .wr_en(is_data), .wr_data(a_dout.data), .full(q_full),
    .rd_en(cmp_pop_i), .rd_data(cmp_data_o), .empty(q_empty), .count()
  );
  assign cmp_valid_o = !q_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      trigger_o <= 1'b0; overflow_o <= 1'b0;
    end else begin
      trigger_o <= !a_empty && a_dout.k && a_dout.data == K_TRIGGER;
      if (is_data && q_full) overflow_o <= 1'b1;
    end
  end

  // the transceiver side must never be dropped silently
  always_ff @(posedge link_clk) begin
    if (!link_rst && sym_valid && !(sym.k && sym.data == K_IDLE)) assert (!a_full) else $error("link_rx: CDC FIFO overflow");
  end

endmodule
