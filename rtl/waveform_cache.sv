// waveform_cache: on-chip waveform store of the sequencer, 128 ksamples.
//
// The store holds SAMPLES complex points (16-bit I in the upper half,
// 16-bit Q in the lower), four points per 128-bit word, as two pages of
// SAMPLES/2. Two read ports serve the two waveform engines with one clock
// of latency; a fill port writes one page at a time from deep memory.
// Either the whole store is one library (PLAY addresses cover both pages),
// or it is used ping-pong: a sequence plays from one page while a PREFETCH
// refills the other, and the compiler alternates the pages. The size, the
// two-page split and the concurrent play/fill follow the sequencer this
// models; the word organisation, addressing the page by the top address
// bit, and dropping a prefetch that arrives while a fill runs are this
// design's choices.
//
// Memory port: one request (mem_req_addr = first 128-bit word in deep
// memory, mem_req_len = words) held until mem_req_ready; then the words
// arrive in order with mem_rd_valid. fill_busy_o is high from the request
// until the last word is written.
module waveform_cache
  import aps2_pkg::*;
#(
  parameter int unsigned SAMPLES = 131072,
  localparam int unsigned WORDS  = SAMPLES / SPC,
  localparam int unsigned WA_W   = $clog2(WORDS),
  localparam int unsigned DW     = SPC * 2 * SAMPLE_W
) (
  input  logic              clk,
  input  logic              rst,
  // read ports
  input  logic              rd_en [NWF],
  input  logic [WA_W-1:0]   rd_addr [NWF],
  output logic [DW-1:0]     rd_data [NWF],
  // prefetch request from the waveform engine
  input  logic              pf_valid_i,
  input  logic              pf_page_i,
  input  logic [31:0]       pf_src_i,
  output logic              fill_busy_o,
  output logic              pf_dropped_o,
  // deep memory read port
  output logic              mem_req_valid,
  output logic [31:0]       mem_req_addr,
  output logic [31:0]       mem_req_len,
  input  logic              mem_req_ready,
  input  logic              mem_rd_valid,
  input  logic [DW-1:0]     mem_rd_data
);

  logic [DW-1:0] mem [WORDS];

  for (genvar p = 0; p < NWF; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
    end
  end

  typedef enum logic [1:0] {F_IDLE, F_REQ, F_DATA} fstate_e;
  fstate_e        fstate;
  logic [WA_W-1:0] waddr;
  logic [WA_W-2:0] left;     // words still to come, minus one

  always_ff @(posedge clk) begin
    if (fstate == F_DATA && mem_rd_valid) mem[waddr] <= mem_rd_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fstate <= F_IDLE; waddr <= '0; left <= '0; mem_req_addr <= '0; pf_dropped_o <= 1'b0;
    end else begin
      unique case (fstate)
        F_IDLE: if (pf_valid_i) begin
          fstate       <= F_REQ;
          mem_req_addr <= pf_src_i;
          waddr        <= {pf_page_i, {(WA_W-1){1'b0}}};
          left         <= '1;
        end
        F_REQ: if (mem_req_ready) fstate <= F_DATA;
        default: if (mem_rd_valid) begin
          waddr <= waddr + 1'b1;
          left  <= left - 1'b1;
          if (left == '0) fstate <= F_IDLE;
        end
      endcase
      if (pf_valid_i && fstate != F_IDLE) pf_dropped_o <= 1'b1;
    end
  end

  assign mem_req_valid = (fstate == F_REQ);
  assign mem_req_len   = 32'(WORDS / 2);
  assign fill_busy_o   = (fstate != F_IDLE);

endmodule
