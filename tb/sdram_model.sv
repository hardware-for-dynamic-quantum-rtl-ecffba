// sdram_model: behavioural model of the deep memory behind the caches
// (the real part is DDR3 with a vendor controller). A request is accepted
// after REQ_LAT clocks, then the words starting at req_addr stream out one
// per clock after a further LAT clocks, BEAT_GAP idle clocks between words.
// Burst length is req_len, or LINE when req_len is not connected (0).
// Contents are written directly into mem by the testbench.
module sdram_model #(
  parameter int unsigned DW         = 64,
  parameter int unsigned DEPTH_LOG2 = 12,
  parameter int unsigned LINE       = 128,
  parameter int unsigned REQ_LAT    = 2,
  parameter int unsigned LAT        = 20,
  parameter int unsigned BEAT_GAP   = 0
) (
  input  logic          clk,
  input  logic          req_valid,
  input  logic [31:0]   req_addr,
  input  logic [31:0]   req_len,
  output logic          req_ready,
  output logic          rd_valid,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [1 << DEPTH_LOG2];
  int unsigned reqs = 0;

  initial begin
    req_ready = 0; rd_valid = 0; rd_data = '0;
    forever begin
      int unsigned a, n;
      @(posedge clk);
      if (req_valid) begin
        repeat (REQ_LAT) @(posedge clk);
        req_ready <= 1;
        a = req_addr; n = (req_len == 0) ? LINE : req_len;
        reqs++;
        @(posedge clk); req_ready <= 0;
        repeat (LAT) @(posedge clk);
        for (int unsigned i = 0; i < n; i++) begin
          rd_valid <= 1; rd_data <= mem[(a + i) % (1 << DEPTH_LOG2)];
          @(posedge clk);
          if (BEAT_GAP > 0) begin rd_valid <= 0; repeat (BEAT_GAP) @(posedge clk); end
        end
        rd_valid <= 0;
      end
    end
  end
endmodule
