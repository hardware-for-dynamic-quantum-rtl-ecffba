// waveform_engine: output engine for one analog channel of the sequencer.
//
// Commands arrive from the sequencer's dispatcher into a queue (QDEPTH
// deep) and are executed in order:
//   PLAY      stream `count` words (four samples each) from the waveform
//             cache starting at sample address `addr`; with the
//             time-amplitude (TA) flag the single point at `addr` is held
//             for the whole count instead, so flat and zero stretches need
//             no memory.
//   WAIT      stall until a trigger pulse arrives.
//   SYNC      stall until the sequencer's sync_go pulse (at_sync_o is high
//             while waiting).
//   PREFETCH  ask the waveform cache to fill a page from deep memory.
// The command set, four samples per clock and the two-clock minimum
// per pulse (a new pulse every 6.66 ns at 300 MHz) follow the sequencer
// this models. The field layout is in aps2_pkg. Each cache point is complex;
// CHANNEL selects the part this engine plays (0 = I, 1 = Q), so one PLAY
// sent to both engines plays one complex pulse. Only engine 0 forwards
// PREFETCH. These are this design's choices.
//
// Timing: the next command is taken in the clock a PLAY ends, a trigger or
// sync_go arrives, or the engine is idle, so pulses follow without gaps.
// Samples appear 1 clock after the cache read (one cache latency); the
// output is zero when nothing plays. A PLAY of count 0 or 1 lasts 2 clocks.
module waveform_engine
  import aps2_pkg::*;
#(
  parameter int unsigned CHANNEL    = 0,
  parameter int unsigned QDEPTH_LOG2 = 5,
  parameter int unsigned WADDR_W    = 15   // cache word address
) (
  input  logic                         clk,
  input  logic                         rst,
  // command queue
  input  logic                         cmd_wr,
  input  logic [CMD_W-1:0]             cmd_data,
  output logic                         cmd_full,
  output logic                         cmd_empty,
  // synchronisation
  input  logic                         trigger_i,
  input  logic                         sync_go_i,
  output logic                         at_sync_o,
  // waveform cache read port (1 clock latency)
  output logic                         rd_en_o,
  output logic [WADDR_W-1:0]           rd_addr_o,
  input  logic [SPC*2*SAMPLE_W-1:0]    rd_data_i,
  // prefetch request
  output logic                         pf_valid_o,
  output logic                         pf_page_o,
  output logic [31:0]                  pf_src_o,
  // output
  output logic signed [SAMPLE_W-1:0]   sample_o [SPC],
  output logic                         playing_o
);

  typedef enum logic [1:0] {S_IDLE, S_PLAY, S_WAIT, S_SYNC} state_e;

  state_e              state;
  logic [23:0]         cnt;
  logic [WADDR_W+1:0]  addr;      // sample address
  logic                ta;
  logic [CMD_W-1:0]    head;
  logic                pop;

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

  wf_op_e hop;
  assign hop = wf_op_e'(head[55:52]);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cnt <= '0; addr <= '0; ta <= 1'b0;
      pf_valid_o <= 1'b0; pf_page_o <= 1'b0; pf_src_o <= '0;
    end else begin
      pf_valid_o <= 1'b0;
      if (state == S_PLAY) begin
        cnt <= cnt - 1'b1;
        if (!ta) addr <= addr + (WADDR_W+2)'(SPC);
      end
      if (ready_next) begin
        state <= S_IDLE;
        if (pop) begin
          unique case (hop)
            WF_PLAY: begin
              state <= S_PLAY;
              cnt   <= (head[47:24] < 24'd2) ? 24'd2 : head[47:24];
              addr  <= head[WADDR_W+1:0];
              ta    <= head[51];
            end
            WF_WAIT: state <= S_WAIT;
            WF_SYNC: state <= S_SYNC;
            default: begin
              pf_valid_o <= (CHANNEL == 0);
              pf_page_o  <= head[16];
              pf_src_o   <= head[31:0];
            end
          endcase
        end
      end
    end
  end

  assign at_sync_o = (state == S_SYNC);
  assign rd_en_o   = (state == S_PLAY);
  assign rd_addr_o = addr[WADDR_W+1:2];

  // output stage: pick this engine's part of each complex point
  logic       play_d, ta_d;
  logic [1:0] lane_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      play_d <= 1'b0; ta_d <= 1'b0; lane_d <= '0;
    end else begin
      play_d <= (state == S_PLAY);
      ta_d   <= ta;
      lane_d <= addr[1:0];
    end
  end

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      automatic int lane = ta_d ? int'(lane_d) : k;
      automatic logic [2*SAMPLE_W-1:0] pt = rd_data_i[lane*2*SAMPLE_W +: 2*SAMPLE_W];
      // point layout: I in the upper half, Q in the lower half
      sample_o[k] = !play_d ? '0 :
                    (CHANNEL == 0) ? $signed(pt[2*SAMPLE_W-1:SAMPLE_W]) : $signed(pt[SAMPLE_W-1:0]);
    end
  end
  assign playing_o = play_d;

endmodule
