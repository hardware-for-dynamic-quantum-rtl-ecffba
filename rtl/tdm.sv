// tdm: trigger distribution module.
//
// Collects qubit measurement results on eight comparator inputs (one of
// them a data-valid strobe), and broadcasts them with the system trigger to
// NOUT sequencer modules over serial links, plus one more link to another
// distribution module. Inside: the baseline steering logic (tdm_steering),
// the trigger generator, and one link framer per output. The counts (eight
// inputs, nine sequencer links and one inter-crate link) follow the module
// this models. Its input link from other distribution modules has no
// function in the baseline and is not built here. The comparators and
// transceivers are outside.
//
// Timing: from the strobe pins to a data symbol on every link is 3 clocks
// (input register, edge detect, framer).
module tdm
  import aps2_pkg::*;
#(
  parameter int unsigned NOUT = 9
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  meas_i,
  input  logic        trig_run,
  input  logic [31:0] trig_interval,
  output link_sym_t   link_o [NOUT+1],
  output logic        link_valid_o [NOUT+1],
  output logic [NOUT:0] link_dropped_o,
  output logic [31:0] word_count_o,
  output logic [31:0] trig_count_o
);

  logic       wv, trig;
  logic [7:0] w;

  tdm_steering u_steer (
    .clk, .rst, .meas_i, .word_valid_o(wv), .word_o(w), .word_count_o
  );

  trigger_generator u_trig (
    .clk, .rst, .run(trig_run), .interval(trig_interval), .trig_o(trig), .trig_count_o
  );

  for (genvar l = 0; l <= NOUT; l++) begin : g_link
    link_tx u_tx (
      .clk, .rst, .trig_i(trig), .data_valid_i(wv), .data_i(w),
      .sym_o(link_o[l]), .sym_valid_o(link_valid_o[l]), .dropped_o(link_dropped_o[l])
    );
  end

endmodule
