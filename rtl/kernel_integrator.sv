// kernel_integrator: the receiver's "decision engine".
//
// For one measurement record v[0..L-1] it forms q = sum_l k[l] * v[l] with a
// stored complex kernel k, then reports the qubit state as (Re q >
// threshold). Used with a real input on the fast path, where the kernel
// also demodulates and channel-filters the IF signal (one stage replaces
// mixer, filter and integrator), and with the complex baseband stream on
// the diagnostic path. The multiply-accumulate and the threshold are the
// receiver's published structure; the kernel store, the record framing, the
// choice of the real part for thresholding and all widths are this
// design's.
//
// Interface: samples enter with valid_i; last_i marks the final sample of a
// record, and the next valid sample starts a new one. Samples beyond
// KERNEL_LEN get a zero weight. The kernel is written through kw_* at any
// time between records. q_re_o/q_im_o hold the integrated value for
// software.
//
// Timing: state_valid_o pulses 3 clocks after the clock that carried
// last_i (kernel read, multiply, accumulate). Throughput one sample per
// clock.
module kernel_integrator #(
  parameter int unsigned DATA_W     = 14,
  parameter int unsigned KERNEL_W   = 16,
  parameter int unsigned KERNEL_LEN = 4096,
  parameter int unsigned ACC_W      = 48,
  localparam int unsigned KA_W      = $clog2(KERNEL_LEN)
) (
  input  logic                        clk,
  input  logic                        rst,
  // kernel write port
  input  logic                        kw_en,
  input  logic [KA_W-1:0]             kw_addr,
  input  logic signed [KERNEL_W-1:0]  kw_re,
  input  logic signed [KERNEL_W-1:0]  kw_im,
  input  logic signed [ACC_W-1:0]     threshold,
  // sample stream
  input  logic                        valid_i,
  input  logic                        last_i,
  input  logic signed [DATA_W-1:0]    re_i,
  input  logic signed [DATA_W-1:0]    im_i,
  // decision
  output logic                        state_valid_o,
  output logic                        state_o,
  output logic signed [ACC_W-1:0]     q_re_o,
  output logic signed [ACC_W-1:0]     q_im_o
);

  localparam int unsigned PW = DATA_W + KERNEL_W + 1;

  logic [2*KERNEL_W-1:0] kmem [KERNEL_LEN];
  logic [KA_W:0]         idx;       // saturates at KERNEL_LEN

  always_ff @(posedge clk) begin
    if (kw_en) kmem[kw_addr] <= {kw_re, kw_im};
  end

  // stage 1: kernel read
  logic                       v1, l1, z1;
  logic signed [DATA_W-1:0]   sr1, si1;
  logic [2*KERNEL_W-1:0]      k1;

  always_ff @(posedge clk) begin
    k1 <= kmem[idx[KA_W-1:0]];
    if (rst) begin
      idx <= '0; v1 <= 1'b0; l1 <= 1'b0; z1 <= 1'b0; sr1 <= '0; si1 <= '0;
    end else begin
      v1  <= valid_i;
      l1  <= valid_i & last_i;
      z1  <= idx[KA_W];
      sr1 <= re_i;
      si1 <= im_i;
      if (valid_i) begin
        if (last_i)          idx <= '0;
        else if (!idx[KA_W]) idx <= idx + 1'b1;
      end
    end
  end

  // stage 2: complex multiply
  logic                    v2, l2;
  logic signed [PW-1:0]    pr2, pi2;
  logic signed [KERNEL_W-1:0] kr, ki;
  assign kr = z1 ? '0 : $signed(k1[2*KERNEL_W-1:KERNEL_W]);
  assign ki = z1 ? '0 : $signed(k1[KERNEL_W-1:0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      v2 <= 1'b0; l2 <= 1'b0; pr2 <= '0; pi2 <= '0;
    end else begin
      v2  <= v1;
      l2  <= l1;
      pr2 <= PW'(sr1 * kr) - PW'(si1 * ki);
      pi2 <= PW'(sr1 * ki) + PW'(si1 * kr);
    end
  end

  // stage 3: accumulate and threshold
  logic signed [ACC_W-1:0] acc_re, acc_im, sum_re, sum_im;
  assign sum_re = acc_re + ACC_W'(pr2);
  assign sum_im = acc_im + ACC_W'(pi2);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_re <= '0; acc_im <= '0; state_valid_o <= 1'b0; state_o <= 1'b0;
      q_re_o <= '0; q_im_o <= '0;
    end else begin
      state_valid_o <= 1'b0;
      if (v2) begin
        if (l2) begin
          acc_re        <= '0;
          acc_im        <= '0;
          q_re_o        <= sum_re;
          q_im_o        <= sum_im;
          state_o       <= (sum_re > threshold);
          state_valid_o <= 1'b1;
        end else begin
          acc_re <= sum_re;
          acc_im <= sum_im;
        end
      end
    end
  end

endmodule
