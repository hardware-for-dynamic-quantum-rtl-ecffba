// waveform_cache_tb: fills page 1 from the memory model while port 0 keeps
// reading page 0, then checks every word of page 1 through port 1 and
// that a prefetch arriving during a fill is dropped and flagged.
module waveform_cache_tb;
  import aps2_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  localparam int S = 256, WORDS = S / 4, WA = 6, DW = 128;
  logic rd_en [NWF]; logic [WA-1:0] rd_addr [NWF]; logic [DW-1:0] rd_data [NWF];
  logic pf_v, pf_page, busy, dropped; logic [31:0] pf_src;
  logic mrv, mrr, mdv; logic [31:0] mra, mrl; logic [DW-1:0] mdd;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  waveform_cache #(.SAMPLES(S)) dut (.clk, .rst, .rd_en, .rd_addr, .rd_data, .pf_valid_i(pf_v),
    .pf_page_i(pf_page), .pf_src_i(pf_src), .fill_busy_o(busy), .pf_dropped_o(dropped),
    .mem_req_valid(mrv), .mem_req_addr(mra), .mem_req_len(mrl), .mem_req_ready(mrr),
    .mem_rd_valid(mdv), .mem_rd_data(mdd));
  sdram_model #(.DW(DW), .DEPTH_LOG2(8), .LAT(5), .BEAT_GAP(1)) mem (.clk, .req_valid(mrv), .req_addr(mra),
    .req_len(mrl), .req_ready(mrr), .rd_valid(mdv), .rd_data(mdd));
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [DW-1:0] pat(int i);
    return {32'(i * 3 + 1), 32'(i ^ 32'h5A5A), 32'(i + 77), 32'(~i)};
  endfunction
  initial begin
    for (int i = 0; i < 256; i++) mem.mem[i] = pat(i);
    foreach (rd_en[p]) begin rd_en[p] = 0; rd_addr[p] = 0; end
    pf_v = 0; pf_page = 0; pf_src = 0;
    repeat (3) @(posedge clk); rst <= 0;
    // page 0 from memory words 100.., page 1 from words 10..
    for (int pg = 0; pg < 2; pg++) begin
      @(negedge clk); pf_v = 1; pf_page = pg[0]; pf_src = (pg == 0) ? 100 : 10;
      @(negedge clk); pf_v = 0;
      if (pg == 1) begin
        // reads of page 0 during the fill
        int k = 0;
        @(negedge clk); pf_v = 1; pf_page = 0; pf_src = 0;   // must be dropped
        @(negedge clk); pf_v = 0;
        while (busy) begin
          rd_en[0] = 1; rd_addr[0] = 6'(k % 32);
          @(negedge clk);
          chk(rd_data[0] == pat(100 + ((k) % 32)), $sformatf("page0 during fill k=%0d", k));
          k++;
        end
        chk(k > 32, "fill too short to overlap");
      end else begin
        while (busy) @(negedge clk);
      end
    end
    rd_en[0] = 0;
    chk(dropped, "prefetch during fill not flagged");
    chk(mem.reqs == 2, $sformatf("memory requests %0d", mem.reqs));
    for (int w = 0; w < 32; w++) begin
      rd_en[1] = 1; rd_addr[1] = 6'(32 + w);
      @(negedge clk);
      chk(rd_data[1] == pat(10 + w), $sformatf("page1 word %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
