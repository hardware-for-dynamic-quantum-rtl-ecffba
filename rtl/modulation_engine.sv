// modulation_engine: NCO bank and its sequencer for single-sideband
// modulation and real-time frame changes.
//
// NNCO numerically controlled oscillators (four) run all the time. Each
// has a phase increment (detuning frequency), a phase offset (e.g. X versus
// Y pulses) and a frame (accumulated Z rotations). The phase for sample k
// of a clock is acc + k*inc + offset + frame; acc advances by 4*inc each
// clock, so every NCO keeps tracking its qubit's phase whether or not it is
// selected. Commands from the queue:
//   RESET_PHASE, SET_PHASE_OFFSET, SET_PHASE_INCREMENT, UPDATE_FRAME
//              act on the NCOs in the command's mask; they are held as
//              pending and take effect together at the next boundary;
//   MODULATE   select one NCO for `count` words;
//   WAIT       stall until a trigger pulse; SYNC stall until sync_go.
// A boundary is the end of a MODULATE, the release of a WAIT or SYNC, or
// the start of a MODULATE from idle, so a frame change lands exactly
// between two pulses and a phase reset exactly on the trigger. Phase
// commands may be taken from the queue while a MODULATE plays. The command
// set and the hold-until-boundary rule follow the sequencer this models;
// the exact boundary list, the 24-bit phase and the field layout are this
// design's choices. UPDATE_FRAME adds to the frame.
//
// Outputs: phase_o[k] for the four samples of the clock, of the selected NCO
// (the last selected one when idle), registered one clock after the engine
// state, aligned with the waveform engines.
module modulation_engine
  import aps2_pkg::*;
#(
  parameter int unsigned NNCO        = 4,
  parameter int unsigned QDEPTH_LOG2 = 5
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                cmd_wr,
  input  logic [CMD_W-1:0]    cmd_data,
  output logic                cmd_full,
  output logic                cmd_empty,
  input  logic                trigger_i,
  input  logic                sync_go_i,
  output logic                at_sync_o,
  output logic [PHASE_W-1:0]  phase_o [SPC],
  output logic                modulating_o,
  output logic [1:0]          nco_sel_o
);

  typedef logic [PHASE_W-1:0] ph_t;
  typedef enum logic [1:0] {S_IDLE, S_MOD, S_WAIT, S_SYNC} state_e;

  ph_t acc [NNCO], inc [NNCO], off [NNCO], frame [NNCO];
  // pending updates
  ph_t  p_inc [NNCO], p_off [NNCO], p_frame [NNCO];
  logic p_inc_v [NNCO], p_off_v [NNCO], p_rst [NNCO];

  state_e           state;
  logic [23:0]      cnt;
  logic [1:0]       sel;
  logic [CMD_W-1:0] head;
  logic             pop;

  sync_fifo #(.WIDTH(CMD_W), .DEPTH_LOG2(QDEPTH_LOG2)) u_q (
    .clk, .rst, .flush(1'b0), .wr_en(cmd_wr), .wr_data(cmd_data), .full(cmd_full),
    .rd_en(pop), .rd_data(head), .empty(cmd_empty), .count()
  );

  mod_op_e hop;
  logic    h_phase_cmd;
  assign hop         = mod_op_e'(head[55:52]);
  assign h_phase_cmd = !cmd_empty && (hop inside {MOD_RESET_PHASE, MOD_SET_PHASE_OFFSET,
                                                  MOD_SET_PHASE_INCREMENT, MOD_UPDATE_FRAME});

  // Control: phase commands are taken whenever the engine is idle or
  // playing; everything else only at a release point.
  logic release_pt;   // the current command ends this clock
  always_comb begin
    unique case (state)
      S_IDLE:  release_pt = 1'b1;
      S_MOD:   release_pt = (cnt == 24'd1);
      S_WAIT:  release_pt = trigger_i;
      default: release_pt = sync_go_i;
    endcase
  end

  logic take_phase, take_other;
  assign take_phase = h_phase_cmd && (state == S_IDLE || state == S_MOD);
  assign take_other = !cmd_empty && !h_phase_cmd && release_pt;
  assign pop        = take_phase || take_other;

  // boundary: pending phase commands take effect
  logic boundary;
  assign boundary = (state == S_MOD  && cnt == 24'd1) ||
                    (state == S_WAIT && trigger_i)    ||
                    (state == S_SYNC && sync_go_i)    ||
                    (state == S_IDLE && take_other && hop == MOD_MODULATE);

  // pending values including a phase command taken this very clock
  ph_t  n_inc [NNCO], n_off [NNCO], n_frame [NNCO];
  logic n_inc_v [NNCO], n_off_v [NNCO], n_rst [NNCO];
  always_comb begin
    for (int n = 0; n < NNCO; n++) begin
      n_inc[n] = p_inc[n]; n_off[n] = p_off[n]; n_frame[n] = p_frame[n];
      n_inc_v[n] = p_inc_v[n]; n_off_v[n] = p_off_v[n]; n_rst[n] = p_rst[n];
      if (take_phase && head[48+n]) begin
        unique case (hop)
          MOD_RESET_PHASE:         begin n_rst[n] = 1'b1; n_frame[n] = '0; end
          MOD_SET_PHASE_OFFSET:    begin n_off_v[n] = 1'b1; n_off[n] = head[PHASE_W-1:0]; end
          MOD_SET_PHASE_INCREMENT: begin n_inc_v[n] = 1'b1; n_inc[n] = head[PHASE_W-1:0]; end
          default:                 n_frame[n] = p_frame[n] + head[PHASE_W-1:0];
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cnt <= '0; sel <= '0;
      for (int n = 0; n < NNCO; n++) begin
        acc[n] <= '0; inc[n] <= '0; off[n] <= '0; frame[n] <= '0;
        p_inc[n] <= '0; p_off[n] <= '0; p_frame[n] <= '0;
        p_inc_v[n] <= 1'b0; p_off_v[n] <= 1'b0; p_rst[n] <= 1'b0;
      end
    end else begin
      // NCOs
      for (int n = 0; n < NNCO; n++) begin
        if (boundary) begin
          automatic ph_t ninc = n_inc_v[n] ? n_inc[n] : inc[n];
          inc[n]     <= ninc;
          if (n_off_v[n]) off[n] <= n_off[n];
          frame[n]   <= n_rst[n] ? n_frame[n] : frame[n] + n_frame[n];
          acc[n]     <= n_rst[n] ? '0 : acc[n] + (inc[n] << 2);
          p_inc_v[n] <= 1'b0; p_off_v[n] <= 1'b0; p_rst[n] <= 1'b0; p_frame[n] <= '0;
        end else begin
          acc[n]     <= acc[n] + (inc[n] << 2);
          p_inc[n] <= n_inc[n]; p_off[n] <= n_off[n]; p_frame[n] <= n_frame[n];
          p_inc_v[n] <= n_inc_v[n]; p_off_v[n] <= n_off_v[n]; p_rst[n] <= n_rst[n];
        end
      end
      // command sequencing
      if (state == S_MOD) cnt <= cnt - 1'b1;
      if (release_pt && state != S_IDLE) state <= S_IDLE;
      if (take_other) begin
        unique case (hop)
          MOD_MODULATE: begin
            state <= S_MOD;
            cnt   <= (head[47:24] == '0) ? 24'd1 : head[47:24];
            sel   <= head[49:48];
          end
          MOD_WAIT: state <= S_WAIT;
          MOD_SYNC: state <= S_SYNC;
          default: ;
        endcase
      end
    end
  end

  assign at_sync_o = (state == S_SYNC);

  // registered phase output
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < SPC; k++) phase_o[k] <= '0;
      modulating_o <= 1'b0; nco_sel_o <= '0;
    end else begin
      for (int k = 0; k < SPC; k++)
        phase_o[k] <= acc[sel] + ph_t'(k) * inc[sel] + off[sel] + frame[sel];
      modulating_o <= (state == S_MOD);
      nco_sel_o    <= sel;
    end
  end

endmodule
