// sequencer: control unit, decoder and dispatcher of the pulse sequencer.
//
// One instruction stream drives all output engines (superscalar dispatch).
// Resources: a program counter, a loadable down-counting repeat register, a
// call stack holding {return address, repeat value}, an 8-bit comparison
// register loaded from the serial link, and a comparison result bit.
//
// Fetch: the fetch counter walks forward through the instruction cache and
// fills a small look-ahead buffer (2^BUF_LOG2 entries) as long as there is
// room; a cache miss re-requests the same address. Decode takes the head of
// the buffer, one instruction per clock:
//   WAVEFORM / MARKER / MODULATOR  write the payload into the queue of each
//       engine named in the mask (stall while a target queue is full);
//   WAIT  write a WAIT command into every engine queue;
//   SYNC  write SYNC into every queue, then stall until every queue is empty
//       and every engine waits at its SYNC; then pulse sync_go_o so all
//       engines resume in the same clock;
//   LOAD_REPEAT  repeat <= value;  REPEAT  if repeat == 0 fall through,
//       else repeat -= 1 and jump;
//   LOAD_CMP  cmp <= next byte from the link queue (stall while empty);
//   CMP  result <= (cmp op mask), op in {=, !=, <, >};
//   GOTO / CALL  jump, when the conditional flag is clear or result is 1;
//       CALL pushes {pc+1, repeat};  RETURN pops and jumps back, restoring
//       repeat;
//   PREFETCH  pass the address to the instruction cache as a hint.
// A taken jump flushes the look-ahead buffer and restarts fetch at the
// target. Because engines have their own queues, the decoder runs ahead of
// playback and the refill after a jump is hidden as long as the queues hold
// work. The instruction list and the resources follow the sequencer this
// models; the encoding (aps2_pkg), the stalls on LOAD_CMP and SYNC, the
// stack depth and the buffer depth are this design's choices.
//
// Engine order: 0-1 waveform (analog 1, 2), 2-5 marker 1-4, 6 modulation.
// Timing: a taken jump costs 3 clocks of dispatch (flush, cache request,
// cache response) when the target hits in the cache.
module sequencer
  import aps2_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 16,
  parameter int unsigned BUF_LOG2    = 3
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 run,
  // instruction cache
  output logic                 ic_req_o,
  output logic [IADDR_W-1:0]   ic_addr_o,
  input  logic                 ic_valid_i,
  input  logic                 ic_miss_i,
  input  logic [INSTR_W-1:0]   ic_data_i,
  output logic                 ic_pf_o,
  output logic [IADDR_W-1:0]   ic_pf_addr_o,
  // serial link data (comparison values)
  input  logic                 cmp_valid_i,
  input  logic [7:0]           cmp_data_i,
  output logic                 cmp_pop_o,
  // engine queues
  output logic [NENG-1:0]      eng_wr_o,
  output logic [CMD_W-1:0]     eng_cmd_o [NENG],
  input  logic [NENG-1:0]      eng_full_i,
  input  logic [NENG-1:0]      eng_empty_i,
  input  logic [NENG-1:0]      eng_at_sync_i,
  output logic                 sync_go_o,
  // status
  output logic [IADDR_W-1:0]   pc_o,
  output logic                 stack_err_o,
  output logic [31:0]          jump_count_o,
  output logic [31:0]          stall_count_o
);

  localparam int unsigned SP_W = $clog2(STACK_DEPTH + 1);
  localparam logic [NENG-1:0] ALL = '1;

  typedef struct packed {
    logic [IADDR_W-1:0] pc;
    logic [INSTR_W-1:0] instr;
  } buf_ent_t;

  // ---------------- fetch ----------------
  logic [IADDR_W-1:0] fetch_pc, req_pc;
  logic [2:0]         epoch, req_epoch;
  logic               req_out;
  logic               flush;
  logic [IADDR_W-1:0] flush_target;
  logic               buf_full, buf_empty, buf_pop;
  logic [BUF_LOG2:0]  buf_count;
  buf_ent_t           buf_head;
  logic               rsp_ok;

  assign rsp_ok   = req_out && req_epoch == epoch && !flush;
  assign ic_req_o = run && !flush && !(rsp_ok && ic_miss_i) &&
                    (buf_count + (BUF_LOG2+1)'(req_out) < (BUF_LOG2+1)'((1 << BUF_LOG2) - 1));
  assign ic_addr_o = fetch_pc;

  always_ff @(posedge clk) begin
    if (rst) begin
      fetch_pc <= '0; epoch <= '0; req_out <= 1'b0; req_pc <= '0; req_epoch <= '0;
    end else begin
      req_out   <= ic_req_o;
      req_pc    <= fetch_pc;
      req_epoch <= epoch;
      if (flush) begin
        fetch_pc <= flush_target;
        epoch    <= epoch + 1'b1;
      end else if (rsp_ok && ic_miss_i) begin
        fetch_pc <= req_pc;           // ask again for the missed address
        epoch    <= epoch + 1'b1;
      end else if (ic_req_o) begin
        fetch_pc <= fetch_pc + 1'b1;
      end
    end
  end

  sync_fifo #(.WIDTH($bits(buf_ent_t)), .DEPTH_LOG2(BUF_LOG2)) u_buf (
    .clk, .rst, .flush, .wr_en(rsp_ok && ic_valid_i), .wr_data({req_pc, ic_data_i}),
    .full(buf_full), .rd_en(buf_pop), .rd_data(buf_head), .empty(buf_empty), .count(buf_count)
  );

  // ---------------- decode / dispatch ----------------
  opcode_e           op;
  logic [3:0]        sel;
  logic [CMD_W-1:0]  pay;
  assign op  = opcode_e'(buf_head.instr[63:60]);
  assign sel = buf_head.instr[59:56];
  assign pay = buf_head.instr[55:0];

  logic [15:0]        rep;
  logic [7:0]         cmp_reg;
  logic               cmp_res;
  logic [IADDR_W-1:0] stk_pc  [STACK_DEPTH];
  logic [15:0]        stk_rep [STACK_DEPTH];
  logic [SP_W-1:0]    sp;
  // stack slots: top of stack and next free entry (valid when not empty / full)
  localparam int unsigned SI_W = (STACK_DEPTH > 1) ? $clog2(STACK_DEPTH) : 1;
  logic [SP_W-1:0]    sp_m1;
  logic [SI_W-1:0]    top_i, free_i;
  assign sp_m1  = sp - 1'b1;
  assign top_i  = sp_m1[SI_W-1:0];
  assign free_i = sp[SI_W-1:0];
  logic               in_sync;    // SYNC written, waiting for the engines

  // per-engine encodings of WAIT and SYNC
  function automatic logic [CMD_W-1:0] wait_cmd(int e);
    if (e < NWF)            return {WF_WAIT, 52'd0};
    else if (e < NWF + NMK) return {MK_WAIT, 52'd0};
    else                    return {MOD_WAIT, 52'd0};
  endfunction
  function automatic logic [CMD_W-1:0] sync_cmd(int e);
    if (e < NWF)            return {WF_SYNC, 52'd0};
    else if (e < NWF + NMK) return {MK_SYNC, 52'd0};
    else                    return {MOD_SYNC, 52'd0};
  endfunction

  logic [NENG-1:0] tgt;
  always_comb begin
    tgt = '0;
    unique case (op)
      OP_WAVEFORM:  tgt[NWF-1:0]       = sel[NWF-1:0];
      OP_MARKER:    tgt[NWF+NMK-1:NWF] = sel[NMK-1:0];
      OP_MODULATOR: tgt[NENG-1]        = 1'b1;
      OP_WAIT:      tgt = ALL;
      OP_SYNC:      tgt = in_sync ? '0 : ALL;
      default:      tgt = '0;
    endcase
  end

  logic cond_ok, go, taken, engines_synced;
  assign cond_ok        = !sel[0] || cmp_res;
  assign engines_synced = (&eng_empty_i) && (&eng_at_sync_i);

  always_comb begin
    go = 1'b0; taken = 1'b0; flush = 1'b0; flush_target = buf_head.pc + 1'b1;
    buf_pop = 1'b0; cmp_pop_o = 1'b0; sync_go_o = 1'b0; eng_wr_o = '0;
    ic_pf_o = 1'b0; ic_pf_addr_o = pay[IADDR_W-1:0];
    for (int e = 0; e < NENG; e++)
      eng_cmd_o[e] = (op == OP_WAIT) ? wait_cmd(e) : (op == OP_SYNC) ? sync_cmd(e) : pay;
    if (run && !buf_empty) begin
      unique case (op)
        OP_WAVEFORM, OP_MARKER, OP_MODULATOR, OP_WAIT:
          go = ((tgt & eng_full_i) == '0);
        OP_SYNC:     go = in_sync ? engines_synced : ((eng_full_i) == '0);
        OP_LOAD_CMP: go = cmp_valid_i;
        default:     go = 1'b1;
      endcase
      if (go) begin
        eng_wr_o = tgt;
        unique case (op)
          OP_SYNC:     begin buf_pop = in_sync; sync_go_o = in_sync; end
          OP_LOAD_CMP: begin buf_pop = 1'b1; cmp_pop_o = 1'b1; end
          OP_REPEAT:   begin taken = (rep != 16'd0); end
          OP_GOTO:     begin taken = cond_ok; end
          OP_CALL:     begin taken = cond_ok; end
          OP_RETURN:   begin taken = 1'b1; end
          OP_PREFETCH: begin buf_pop = 1'b1; ic_pf_o = 1'b1; end
          default:     buf_pop = 1'b1;
        endcase
        if (op inside {OP_REPEAT, OP_GOTO, OP_CALL, OP_RETURN}) begin
          if (taken) begin
            flush        = 1'b1;
            flush_target = (op == OP_RETURN) ? stk_pc[top_i] : pay[IADDR_W-1:0];
          end else begin
            buf_pop = 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rep <= '0; cmp_reg <= '0; cmp_res <= 1'b0; sp <= '0; in_sync <= 1'b0;
      stack_err_o <= 1'b0; pc_o <= '0; jump_count_o <= '0; stall_count_o <= '0;
      for (int i = 0; i < STACK_DEPTH; i++) begin stk_pc[i] <= '0; stk_rep[i] <= '0; end
    end else begin
      if (run && !buf_empty) pc_o <= buf_head.pc;
      if (run && !buf_empty && !go) stall_count_o <= stall_count_o + 1'b1;
      if (flush) jump_count_o <= jump_count_o + 1'b1;
      if (run && !buf_empty && go) begin
        unique case (op)
          OP_SYNC:        in_sync <= !in_sync;
          OP_LOAD_REPEAT: rep <= pay[15:0];
          OP_REPEAT:      if (rep != 16'd0) rep <= rep - 1'b1;
          OP_LOAD_CMP:    cmp_reg <= cmp_data_i;
          OP_CMP: begin
            unique case (cmp_op_e'(sel[1:0]))
              CMP_EQ:  cmp_res <= (cmp_reg == pay[7:0]);
              CMP_NE:  cmp_res <= (cmp_reg != pay[7:0]);
              CMP_LT:  cmp_res <= (cmp_reg <  pay[7:0]);
              default: cmp_res <= (cmp_reg >  pay[7:0]);
            endcase
          end
          OP_CALL: if (cond_ok) begin
            if (sp == SP_W'(STACK_DEPTH)) stack_err_o <= 1'b1;
            else begin
              stk_pc[free_i]  <= buf_head.pc + 1'b1;
              stk_rep[free_i] <= rep;
              sp          <= sp + 1'b1;
            end
          end
          OP_RETURN: begin
            if (sp == '0) stack_err_o <= 1'b1;
            else begin
              rep <= stk_rep[top_i];
              sp  <= sp - 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // a command is never written into a full queue
  always_ff @(posedge clk) begin
    if (!rst) assert ((eng_wr_o & eng_full_i) == '0) else $error("sequencer: write to full engine queue");
  end

endmodule
