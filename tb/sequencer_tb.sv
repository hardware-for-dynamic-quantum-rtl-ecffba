// sequencer_tb: runs a program with a loop (LOAD_REPEAT/REPEAT), nested
// subroutine calls that save the repeat register, branches on link values
// (LOAD_CMP/CMP/conditional GOTO and CALL), SYNC, WAIT and PREFETCH. A
// reference interpreter of the same program gives the command stream each
// engine must receive. The instruction cache is a model that answers in
// one clock and misses at random; engine queues fill and drain at random
// so dispatch stalls; at a SYNC an engine waits for sync_go. Checks the
// per-engine command streams, the prefetch hint, the jump count and that
// stalls, misses and syncs happened. Two runs with different link values
// take the two sides of each branch.
module sequencer_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic run, ic_req, ic_valid, ic_miss, ic_pf, cmp_valid, cmp_pop, sync_go, serr;
  logic [IADDR_W-1:0] ic_addr, ic_pf_addr, pc;
  logic [INSTR_W-1:0] ic_data; logic [7:0] cmp_data;
  logic [NENG-1:0] eng_wr, eng_full, eng_empty, eng_at_sync;
  logic [CMD_W-1:0] eng_cmd [NENG];
  logic [31:0] jumps, stalls;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  sequencer dut (.clk, .rst, .run, .ic_req_o(ic_req), .ic_addr_o(ic_addr), .ic_valid_i(ic_valid),
    .ic_miss_i(ic_miss), .ic_data_i(ic_data), .ic_pf_o(ic_pf), .ic_pf_addr_o(ic_pf_addr),
    .cmp_valid_i(cmp_valid), .cmp_data_i(cmp_data), .cmp_pop_o(cmp_pop),
    .eng_wr_o(eng_wr), .eng_cmd_o(eng_cmd), .eng_full_i(eng_full), .eng_empty_i(eng_empty),
    .eng_at_sync_i(eng_at_sync), .sync_go_o(sync_go), .pc_o(pc), .stack_err_o(serr),
    .jump_count_o(jumps), .stall_count_o(stalls));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [INSTR_W-1:0] prog [64];
  function automatic logic [CMD_W-1:0] pl(int v); return CMD_W'(v) | (CMD_W'(v) << 30); endfunction
  task automatic load_prog();
    foreach (prog[i]) prog[i] = mk_instr(OP_GOTO, 4'd0, 56'd63);
    prog[0]  = mk_instr(OP_LOAD_REPEAT, 0, 56'd2);
    prog[1]  = mk_instr(OP_WAVEFORM, 4'b0011, pl(1));
    prog[2]  = mk_instr(OP_MARKER, 4'b0101, pl(2));
    prog[3]  = mk_instr(OP_REPEAT, 0, 56'd1);
    prog[4]  = mk_instr(OP_CALL, 0, 56'd20);
    prog[5]  = mk_instr(OP_LOAD_CMP, 0, 0);
    prog[6]  = mk_instr(OP_CMP, 4'(CMP_EQ), 56'h05);
    prog[7]  = mk_instr(OP_GOTO, 4'd1, 56'd10);
    prog[8]  = mk_instr(OP_MODULATOR, 0, pl(8));
    prog[9]  = mk_instr(OP_GOTO, 0, 56'd11);
    prog[10] = mk_instr(OP_MODULATOR, 0, pl(10));
    prog[11] = mk_instr(OP_SYNC, 0, 0);
    prog[12] = mk_instr(OP_WAIT, 0, 0);
    prog[13] = mk_instr(OP_PREFETCH, 0, 56'h40);
    prog[14] = mk_instr(OP_LOAD_CMP, 0, 0);
    prog[15] = mk_instr(OP_CMP, 4'(CMP_GT), 56'h10);
    prog[16] = mk_instr(OP_CALL, 4'd1, 56'd20);
    prog[17] = mk_instr(OP_MODULATOR, 0, pl(17));
    prog[18] = mk_instr(OP_GOTO, 0, 56'd30);
    prog[20] = mk_instr(OP_WAVEFORM, 4'b0001, pl(20));
    prog[21] = mk_instr(OP_LOAD_REPEAT, 0, 56'd1);
    prog[22] = mk_instr(OP_MARKER, 4'b1000, pl(22));
    prog[23] = mk_instr(OP_REPEAT, 0, 56'd22);
    prog[24] = mk_instr(OP_RETURN, 0, 0);
    prog[30] = mk_instr(OP_MARKER, 4'b1111, pl(30));
    prog[31] = mk_instr(OP_GOTO, 0, 56'd31);
  endtask

  // reference interpreter
  logic [CMD_W-1:0] exp_q [NENG][$];
  int exp_jumps;
  task automatic interpret(logic [7:0] cv [2]);
    int p = 0, rep = 0, sp = 0, ci = 0; int stk [16][2]; logic [7:0] creg = 0; bit res = 0;
    exp_jumps = 0;
    for (int e = 0; e < NENG; e++) exp_q[e].delete();
    while (p != 31) begin
      logic [3:0] o, s; logic [CMD_W-1:0] y; int np;
      o = prog[p][63:60]; s = prog[p][59:56]; y = prog[p][55:0]; np = p + 1;
      case (opcode_e'(o))
        OP_WAVEFORM: for (int e = 0; e < NWF; e++) if (s[e]) exp_q[e].push_back(y);
        OP_MARKER:   for (int e = 0; e < NMK; e++) if (s[e]) exp_q[NWF+e].push_back(y);
        OP_MODULATOR: exp_q[NENG-1].push_back(y);
        OP_WAIT: for (int e = 0; e < NENG; e++)
                   exp_q[e].push_back(e < NWF ? {WF_WAIT, 52'd0} : e < NWF+NMK ? {MK_WAIT, 52'd0} : {MOD_WAIT, 52'd0});
        OP_SYNC: for (int e = 0; e < NENG; e++)
                   exp_q[e].push_back(e < NWF ? {WF_SYNC, 52'd0} : e < NWF+NMK ? {MK_SYNC, 52'd0} : {MOD_SYNC, 52'd0});
        OP_LOAD_REPEAT: rep = int'(y[15:0]);
        OP_REPEAT: if (rep != 0) begin rep--; np = int'(y[26:0]); exp_jumps++; end
        OP_LOAD_CMP: begin creg = cv[ci]; ci++; end
        OP_CMP: case (cmp_op_e'(s[1:0]))
                  CMP_EQ: res = (creg == y[7:0]); CMP_NE: res = (creg != y[7:0]);
                  CMP_LT: res = (creg < y[7:0]);  default: res = (creg > y[7:0]);
                endcase
        OP_GOTO: if (!s[0] || res) begin np = int'(y[26:0]); exp_jumps++; end
        OP_CALL: if (!s[0] || res) begin stk[sp][0] = p + 1; stk[sp][1] = rep; sp++; np = int'(y[26:0]); exp_jumps++; end
        OP_RETURN: begin sp--; np = stk[sp][0]; rep = stk[sp][1]; exp_jumps++; end
        default: ;
      endcase
      p = np;
    end
  endtask

  // instruction cache model
  always_ff @(posedge clk) begin
    ic_valid <= 1'b0; ic_miss <= 1'b0;
    if (ic_req) begin
      if ($urandom_range(0, 9) == 0) ic_miss <= 1'b1;
      else begin ic_valid <= 1'b1; ic_data <= prog[ic_addr[5:0]]; end
    end
  end
  int misses = 0;
  always @(posedge clk) if (ic_miss && !rst) misses++;

  // engine models
  logic [CMD_W-1:0] got_q [NENG][$];
  int qn [NENG]; bit syncing [NENG];
  int pf_seen = 0, syncs = 0;
  // the model's state is read by the sequencer's flops: update its
  // outputs with nonblocking assignments only
  always @(posedge clk) begin
    if (!rst) model_step();
    for (int e = 0; e < NENG; e++) begin
      eng_full[e]    <= (qn[e] >= 3);
      eng_empty[e]   <= (qn[e] == 0);
      eng_at_sync[e] <= syncing[e];
    end
  end
  task automatic model_step();
    for (int e = 0; e < NENG; e++) begin
      if (sync_go) syncing[e] = 0;
      if (qn[e] > 0 && !syncing[e] && $urandom_range(0, 2) == 0) begin
        logic [CMD_W-1:0] c;
        c = got_q[e][got_q[e].size() - qn[e]];
        qn[e]--;
        if (c[55:52] == ((e < NWF) ? 4'(WF_SYNC) : (e < NWF+NMK) ? 4'(MK_SYNC) : 4'(MOD_SYNC))) syncing[e] = 1;
      end
      if (eng_wr[e]) begin got_q[e].push_back(eng_cmd[e]); qn[e]++; end
    end
    if (sync_go) syncs++;
    if (ic_pf) begin pf_seen++; chk(ic_pf_addr == 27'h40, "prefetch address"); end
  endtask
  // link values
  logic [7:0] cvals [2]; int cidx;
  assign cmp_valid = (cidx < 2);
  assign cmp_data  = cvals[cidx < 2 ? cidx : 0];
  always @(posedge clk) if (cmp_pop) cidx <= cidx + 1;

  initial begin
    load_prog();
    for (int r = 0; r < 4; r++) begin
      rst = 1; run = 0; cidx = 0;
      for (int e = 0; e < NENG; e++) begin got_q[e].delete(); qn[e] = 0; syncing[e] = 0; end
      pf_seen = 0; syncs = 0;
      cvals[0] = (r[0]) ? 8'h05 : 8'($urandom_range(6, 255));
      cvals[1] = (r[1]) ? 8'($urandom_range(17, 255)) : 8'($urandom_range(0, 16));
      interpret(cvals);
      repeat (3) @(posedge clk); @(negedge clk); rst = 0; run = 1;
      repeat (600) @(negedge clk);
      for (int e = 0; e < NENG; e++) begin
        chk(got_q[e].size() == exp_q[e].size(), $sformatf("run %0d engine %0d: %0d commands, expected %0d", r, e, got_q[e].size(), exp_q[e].size()));
        for (int i = 0; i < exp_q[e].size() && i < got_q[e].size(); i++)
          chk(got_q[e][i] == exp_q[e][i], $sformatf("run %0d engine %0d cmd %0d", r, e, i));
      end
      chk(pc == 31 && pf_seen == 1 && syncs == 1 && !serr, $sformatf("pc %0d pf %0d syncs %0d", pc, pf_seen, syncs));
      chk(int'(jumps) > exp_jumps, $sformatf("jumps %0d, %0d before the final loop", jumps, exp_jumps));
      chk(stalls > 0 && misses > 0, "stalls and cache misses exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
