// inst_cache_tb: small geometry (16-instruction lines, 4 circular lines,
// lookahead 2, 2 associative lines) against the deep memory model. Every
// hit must return the instruction stored at its address. Checks that a
// slow sequential walk runs without misses once the lookahead is ahead,
// that a short backward jump hits, that a far jump misses and is served
// after the line fetch, and that PREFETCHed lines (round-robin, oldest
// replaced) hit on first use and survive the walk.
module inst_cache_tb;
  import aps2_pkg::*;
  localparam int LW = 16;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic req, rv, rm, pf, mrv, mrr, mdv;
  logic [26:0] ra, pa, ma; logic [63:0] rd, md; logic [31:0] misses;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  inst_cache #(.LINE_WORDS(LW), .NCIRC(4), .AHEAD(2), .NASSOC(2)) dut (.clk, .rst,
    .req_i(req), .req_addr_i(ra), .rsp_valid_o(rv), .rsp_miss_o(rm), .rsp_data_o(rd),
    .pf_i(pf), .pf_addr_i(pa), .mem_req_valid(mrv), .mem_req_addr(ma), .mem_req_ready(mrr),
    .mem_rd_valid(mdv), .mem_rd_data(md), .miss_count_o(misses));
  sdram_model #(.DW(64), .DEPTH_LOG2(12), .LINE(LW), .LAT(6)) u_mem (.clk, .req_valid(mrv),
    .req_addr({5'd0, ma}), .req_len(32'd0), .req_ready(mrr), .rd_valid(mdv), .rd_data(md));
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [63:0] f(int a); return {32'(a) ^ 32'h5a5a0000, 32'(a * 7 + 3)}; endfunction
  // fetch one instruction, retrying on a miss; returns the misses taken
  task automatic fetch(int a, output int nmiss);
    nmiss = 0;
    forever begin
      @(negedge clk); req = 1; ra = 27'(a);
      @(negedge clk); req = 0;
      if (rv) begin chk(rd == f(a), $sformatf("data at %0d", a)); return; end
      chk(rm, "neither hit nor miss"); nmiss++;
      repeat (2) @(negedge clk);
    end
  endtask
  initial begin
    int m, tot;
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = f(i);
    req = 0; ra = 0; pf = 0; pa = 0;
    repeat (3) @(posedge clk); rst = 0;
    // slow sequential walk
    tot = 0;
    for (int a = 0; a < 200; a++) begin
      fetch(a, m); tot += m;
      if (a >= 2 * LW) chk(m == 0, $sformatf("walk miss at %0d", a));
      repeat (3) @(negedge clk);
    end
    chk(tot > 0 && tot < 12, $sformatf("misses during the walk %0d", tot));
    // short backward jump: line before the current one is still cached
    fetch(199 - LW, m); chk(m == 0, "backward jump hits");
    // far jump misses once
    fetch(3000, m); chk(m >= 1, "far jump misses");
    // prefetch two subroutine lines, then use them
    @(negedge clk); pf = 1; pa = 27'(1000); @(negedge clk); pf = 0;
    repeat (200) @(negedge clk);
    @(negedge clk); pf = 1; pa = 27'(2000); @(negedge clk); pf = 0;
    repeat (200) @(negedge clk);
    fetch(1005, m); chk(m == 0, "prefetched line 1 hits");
    fetch(2010, m); chk(m == 0, "prefetched line 2 hits");
    fetch(3001, m);
    // a third prefetch replaces the oldest (line of 1000)
    @(negedge clk); pf = 1; pa = 27'(500); @(negedge clk); pf = 0;
    repeat (200) @(negedge clk);
    fetch(505, m); chk(m == 0, "third prefetched line hits");
    fetch(2000, m); chk(m == 0, "second line kept");
    fetch(1000, m); chk(m >= 1, "oldest line replaced");
    chk(int'(misses) > 0, "miss counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
