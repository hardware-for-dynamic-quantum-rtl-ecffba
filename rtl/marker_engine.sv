// marker_engine: output engine for one digital marker channel.
//
// Executes from its queue:
//   PLAY  hold marker `state` for `count` words; every word is four copies
//         of the state except the last, which is the 4-bit `pattern` given
//         in the command, so an edge can be placed on any of the four
//         samples of the final clock (833 ps resolution at 1.2 GS/s);
//   WAIT  stall until a trigger pulse; SYNC stall until sync_go.
// The four bits per clock feed a 4:1 serializer outside this block; bit 0
// is sent first. The command set and the programmable last word follow the
// sequencer this models; bit order and the zero output while idle are this
// design's choices.
//
// Timing: the next command is taken in the clock a PLAY ends, a release
// arrives or the engine is idle. The marker word is registered: it appears
// one clock after the engine state it belongs to, aligned with the
// waveform engines' samples. A PLAY of count 0 lasts one word.
module marker_engine
  import aps2_pkg::*;
#(
  parameter int unsigned QDEPTH_LOG2 = 5
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cmd_wr,
  input  logic [CMD_W-1:0]  cmd_data,
  output logic              cmd_full,
  output logic              cmd_empty,
  input  logic              trigger_i,
  input  logic              sync_go_i,
  output logic              at_sync_o,
  output logic [SPC-1:0]    marker_o
);

  typedef enum logic [1:0] {S_IDLE, S_PLAY, S_WAIT, S_SYNC} state_e;

  state_e           state;
  logic [23:0]      cnt;
  logic             mstate;
  logic [SPC-1:0]   pattern;
  logic [CMD_W-1:0] head;
  logic             pop;

  sync_fifo #(.WIDTH(CMD_W), .DEPTH_LOG2(QDEPTH_LOG2)) u_q (
    .clk, .rst, .flush(1'b0), .wr_en(cmd_wr), .wr_data(cmd_data), .full(cmd_full),
    .rd_en(pop), .rd_data(head), .empty(cmd_empty), .count()
  );

  logic ready_next;
  always_comb begin
    unique case (state)
      S_IDLE:  ready_next = 1'b1;
      S_PLAY:  ready_next = (cnt == 24'd1);
      S_WAIT:  ready_next = trigger_i;
      default: ready_next = sync_go_i;
    endcase
  end
  assign pop = ready_next && !cmd_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cnt <= '0; mstate <= 1'b0; pattern <= '0; marker_o <= '0;
    end else begin
      marker_o <= (state != S_PLAY) ? '0 :
                  (cnt == 24'd1)    ? pattern : {SPC{mstate}};
      if (state == S_PLAY) cnt <= cnt - 1'b1;
      if (ready_next) begin
        state <= S_IDLE;
        if (pop) begin
          unique case (mk_op_e'(head[55:52]))
            MK_PLAY: begin
              state   <= S_PLAY;
              cnt     <= (head[47:24] == '0) ? 24'd1 : head[47:24];
              pattern <= head[51:48];
              mstate  <= head[0];
            end
            MK_WAIT: state <= S_WAIT;
            MK_SYNC: state <= S_SYNC;
            default: ;
          endcase
        end
      end
    end
  end

  assign at_sync_o = (state == S_SYNC);

endmodule
