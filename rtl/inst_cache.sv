// inst_cache: two-part instruction cache between the sequencer and deep
// memory.
//
// Lines hold LINE_WORDS (128) 64-bit instructions. Two sets of lines:
//   * circular cache, NCIRC lines: line L lives in slot L mod NCIRC. The
//     controller keeps the line holding the current address and greedily
//     fetches the AHEAD lines after it; the remaining NCIRC-1-AHEAD slots
//     still hold recently played lines, so short backward jumps (loops)
//     hit. As the current address moves on, the oldest lines are the ones
//     overwritten.
//   * associative cache, NASSOC lines with full tags, filled round-robin
//     (oldest first) by PREFETCH hints; it serves subroutines anywhere in
//     memory.
// Line size, the two parts, the lookahead with a local jump buffer and
// round-robin PREFETCH fill follow the sequencer this models. The line
// counts are read from its cache diagram. One line fetch at a time, the
// fetch priority (current line on a miss, then a pending PREFETCH, then
// lookahead), a single pending PREFETCH hint (a newer hint replaces it)
// and marking a line valid only once complete are this design's choices.
//
// Interface: req_i/req_addr_i look up one instruction; one clock later
// rsp_valid_o (hit) with rsp_data_o, or rsp_miss_o, and the requester asks
// again. The address of the latest request is the current address.
// pf_i/pf_addr_i request the line holding pf_addr_i in the associative
// cache. Memory port: mem_req_* names a line start (instruction address),
// held until mem_req_ready; then LINE_WORDS instructions arrive with
// mem_rd_valid.
module inst_cache
  import aps2_pkg::*;
#(
  parameter int unsigned LINE_WORDS = 128,
  parameter int unsigned NCIRC      = 8,
  parameter int unsigned AHEAD      = 4,
  parameter int unsigned NASSOC     = 8,
  parameter int unsigned ADDR_W     = 27,
  localparam int unsigned OFF_W     = $clog2(LINE_WORDS),
  localparam int unsigned TAG_W     = ADDR_W - OFF_W,
  localparam int unsigned NSLOT     = NCIRC + NASSOC,
  localparam int unsigned SLOT_W    = $clog2(NSLOT)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 req_i,
  input  logic [ADDR_W-1:0]    req_addr_i,
  output logic                 rsp_valid_o,
  output logic                 rsp_miss_o,
  output logic [INSTR_W-1:0]   rsp_data_o,
  input  logic                 pf_i,
  input  logic [ADDR_W-1:0]    pf_addr_i,
  output logic                 mem_req_valid,
  output logic [ADDR_W-1:0]    mem_req_addr,
  input  logic                 mem_req_ready,
  input  logic                 mem_rd_valid,
  input  logic [INSTR_W-1:0]   mem_rd_data,
  output logic [31:0]          miss_count_o
);

  typedef logic [TAG_W-1:0] tag_t;

  logic [INSTR_W-1:0] data [NSLOT * LINE_WORDS];
  tag_t               tag   [NSLOT];
  logic               valid [NSLOT];

  // ---------------- lookup ----------------
  function automatic logic [SLOT_W-1:0] circ_slot(tag_t line);
    return SLOT_W'(line % TAG_W'(NCIRC));
  endfunction

  logic            hit;
  logic [SLOT_W-1:0] hit_slot;
  tag_t            req_line;
  assign req_line = req_addr_i[ADDR_W-1:OFF_W];

  always_comb begin
    hit = 1'b0; hit_slot = circ_slot(req_line);
    if (valid[circ_slot(req_line)] && tag[circ_slot(req_line)] == req_line) hit = 1'b1;
    for (int a = 0; a < NASSOC; a++) begin
      if (!hit && valid[NCIRC+a] && tag[NCIRC+a] == req_line) begin
        hit = 1'b1; hit_slot = SLOT_W'(NCIRC + a);
      end
    end
  end

  always_ff @(posedge clk) begin
    rsp_data_o <= data[{hit_slot, req_addr_i[OFF_W-1:0]}];
    if (rst) begin
      rsp_valid_o <= 1'b0; rsp_miss_o <= 1'b0; miss_count_o <= '0;
    end else begin
      rsp_valid_o <= req_i && hit;
      rsp_miss_o  <= req_i && !hit;
      if (req_i && !hit) miss_count_o <= miss_count_o + 1'b1;
    end
  end

  // ---------------- controller ----------------
  tag_t cur_line;
  always_ff @(posedge clk) begin
    if (rst)        cur_line <= '0;
    else if (req_i) cur_line <= req_line;
  end

  logic                 pf_pend;
  tag_t                 pf_line;
  logic [$clog2(NASSOC)-1:0] rr;

  function automatic logic in_circ(tag_t line);
    return valid[circ_slot(line)] && tag[circ_slot(line)] == line;
  endfunction
  function automatic logic in_assoc(tag_t line);
    logic f = 1'b0;
    for (int a = 0; a < NASSOC; a++) if (valid[NCIRC+a] && tag[NCIRC+a] == line) f = 1'b1;
    return f;
  endfunction

  // choose the next line to fetch
  logic              want;
  tag_t              want_line;
  logic [SLOT_W-1:0] want_slot;
  logic              want_pf;
  always_comb begin
    want = 1'b0; want_line = cur_line; want_slot = circ_slot(cur_line); want_pf = 1'b0;
    if (!in_circ(cur_line) && !in_assoc(cur_line)) begin
      want = 1'b1;
    end else if (pf_pend) begin
      want = 1'b1; want_pf = 1'b1; want_line = pf_line; want_slot = SLOT_W'(NCIRC + int'(rr));
    end else begin
      for (int k = AHEAD; k >= 1; k--) begin
        if (!in_circ(cur_line + tag_t'(k))) begin
          want = 1'b1; want_line = cur_line + tag_t'(k); want_slot = circ_slot(cur_line + tag_t'(k));
        end
      end
    end
  end

  typedef enum logic [1:0] {C_IDLE, C_REQ, C_DATA} cstate_e;
  cstate_e           cstate;
  logic [SLOT_W-1:0] fill_slot;
  logic [OFF_W-1:0]  fill_off;

  always_ff @(posedge clk) begin
    if (cstate == C_DATA && mem_rd_valid) data[{fill_slot, fill_off}] <= mem_rd_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cstate <= C_IDLE; fill_slot <= '0; fill_off <= '0; mem_req_addr <= '0;
      pf_pend <= 1'b0; pf_line <= '0; rr <= '0;
      for (int s = 0; s < NSLOT; s++) begin valid[s] <= 1'b0; tag[s] <= '0; end
    end else begin
      if (pf_i && !in_assoc(pf_addr_i[ADDR_W-1:OFF_W])) begin
        pf_pend <= 1'b1; pf_line <= pf_addr_i[ADDR_W-1:OFF_W];
      end
      unique case (cstate)
        C_IDLE: if (want) begin
          cstate           <= C_REQ;
          fill_slot        <= want_slot;
          fill_off         <= '0;
          valid[want_slot] <= 1'b0;
          tag[want_slot]   <= want_line;
          mem_req_addr     <= {want_line, {OFF_W{1'b0}}};
          if (want_pf) begin
            rr <= rr + 1'b1;
            if (!(pf_i && !in_assoc(pf_addr_i[ADDR_W-1:OFF_W]))) pf_pend <= 1'b0;
          end
        end
        C_REQ: if (mem_req_ready) cstate <= C_DATA;
        default: if (mem_rd_valid) begin
          fill_off <= fill_off + 1'b1;
          if (fill_off == OFF_W'(LINE_WORDS - 1)) begin
            cstate           <= C_IDLE;
            valid[fill_slot] <= 1'b1;
          end
        end
      endcase
    end
  end

  assign mem_req_valid = (cstate == C_REQ);

endmodule
