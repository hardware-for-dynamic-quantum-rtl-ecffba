// link_tx: symbol framer for one serial output link.
//
// Sends one symbol per clock: the reserved trigger K symbol when trig_i is
// high, otherwise a pending data byte (K flag low), otherwise the idle K
// symbol. A data byte that meets a trigger waits in a one-entry holding
// register and goes out the next clock; a second byte arriving while one
// waits replaces it and sets the sticky dropped_o. Using a reserved symbol
// for the trigger follows the module this models; the codes (aps2_pkg) and
// the priority are this design's choices. The symbol feeds a transceiver
// outside this block.
//
// Timing: registered, one clock from input to sym_o.
module link_tx
  import aps2_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       trig_i,
  input  logic       data_valid_i,
  input  logic [7:0] data_i,
  output link_sym_t  sym_o,
  output logic       sym_valid_o,
  output logic       dropped_o
);

  logic       hold_v;
  logic [7:0] hold_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      hold_v <= 1'b0; hold_d <= '0; sym_o <= '{k: 1'b1, data: K_IDLE}; sym_valid_o <= 1'b0;
      dropped_o <= 1'b0;
    end else begin
      sym_valid_o <= 1'b1;
      if (trig_i) begin
        sym_o <= '{k: 1'b1, data: K_TRIGGER};
        if (data_valid_i) begin
          if (hold_v) dropped_o <= 1'b1;
          hold_v <= 1'b1; hold_d <= data_i;
        end
      end else if (hold_v) begin
        sym_o  <= '{k: 1'b0, data: hold_d};
        hold_v <= data_valid_i;
        hold_d <= data_i;
      end else if (data_valid_i) begin
        sym_o <= '{k: 1'b0, data: data_i};
      end else begin
        sym_o <= '{k: 1'b1, data: K_IDLE};
      end
    end
  end

endmodule
