// cordic_rotator: pipelined rotation of a complex sample by a phase.
//
// (x_o, y_o) = (x cos p - y sin p, x sin p + y cos p), p = phase_i * 2pi /
// 2^PHASE_W. It serves as the complex mixer after the channelizer's NCO in
// the readout receiver (fed with a real sample and the negated carrier
// phase) and as the "rotation" stage of the pulse sequencer's modulator.
//
// How it works: the top two phase bits rotate the input by a multiple of 90
// degrees exactly; the remaining angle, below 90 degrees, is removed by
// ITERS shift-and-add CORDIC micro-rotations, ITERS_PER_STAGE of them per
// pipeline register. The CORDIC gain (about 1.6468) is divided out with a
// constant multiply in the last stage. Two guard bits below and two above
// the sample width are carried inside; the output saturates to W bits.
// Error is a few LSB.
//
// Timing: latency is ITERS/ITERS_PER_STAGE clocks (7 by default), one
// sample per clock. The default was chosen so that rotation, mixer
// correction and offset together take the 9 clocks the sequencer's output
// path is quoted at; the paper does not say how the rotation is built, so
// CORDIC itself is this design's choice.
module cordic_rotator #(
  parameter int unsigned W               = 16,
  parameter int unsigned PHASE_W         = 24,
  parameter int unsigned ITERS           = 14,
  parameter int unsigned ITERS_PER_STAGE = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid_i,
  input  logic signed [W-1:0]  x_i,
  input  logic signed [W-1:0]  y_i,
  input  logic [PHASE_W-1:0]   phase_i,
  output logic                 valid_o,
  output logic signed [W-1:0]  x_o,
  output logic signed [W-1:0]  y_o
);

  localparam int unsigned NSTAGE = ITERS / ITERS_PER_STAGE;
  localparam int unsigned IW     = W + 4;        // 2 growth + 2 guard bits
  localparam int unsigned ZW     = PHASE_W + 1;  // signed residual angle
  // 1/gain for 14+ iterations, 0.6072529 * 2^16
  localparam logic signed [17:0] KINV = 18'sd39797;

  typedef logic signed [IW-1:0] dat_t;
  typedef logic signed [ZW-1:0] ang_t;

  // atan(2^-i) with a full turn = 2^32
  function automatic logic [31:0] atan32(int i);
    case (i)
      0: return 32'd536870912;  1: return 32'd316933406;
      2: return 32'd167458907;  3: return 32'd85004756;
      4: return 32'd42667331;   5: return 32'd21354465;
      6: return 32'd10679838;   7: return 32'd5340245;
      8: return 32'd2670163;    9: return 32'd1335087;
      10: return 32'd667544;    11: return 32'd333772;
      12: return 32'd166886;    13: return 32'd83443;
      14: return 32'd41722;     15: return 32'd20861;
      16: return 32'd10430;     17: return 32'd5215;
      default: return 32'd0;
    endcase
  endfunction

  function automatic ang_t atan_step(int i);
    logic [31:0] a;
    a = atan32(i) >> (32 - PHASE_W);
    return ang_t'(a);
  endfunction

  function automatic dat_t sat_w(logic signed [IW+17:0] v);
    logic signed [IW+17:0] hi, lo;
    hi = (IW+18)'((1 <<< (W-1)) - 1);
    lo = -(IW+18)'(1 <<< (W-1));
    if (v > hi) return dat_t'(hi);
    if (v < lo) return dat_t'(lo);
    return dat_t'(v);
  endfunction

  dat_t xs [NSTAGE+1];
  dat_t ys [NSTAGE+1];
  ang_t zs [NSTAGE+1];
  logic vs [NSTAGE+1];

  // quadrant pre-rotation (combinational, part of stage 0)
  always_comb begin
    dat_t xe, ye;
    xe = dat_t'(x_i) <<< 2;
    ye = dat_t'(y_i) <<< 2;
    unique case (phase_i[PHASE_W-1 -: 2])
      2'd0: begin xs[0] = xe;  ys[0] = ye;  end
      2'd1: begin xs[0] = -ye; ys[0] = xe;  end
      2'd2: begin xs[0] = -xe; ys[0] = -ye; end
      default: begin xs[0] = ye;  ys[0] = -xe; end
    endcase
    zs[0] = ang_t'({2'b00, phase_i[PHASE_W-3:0]});
    vs[0] = valid_i;
  end

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    dat_t xn, yn;
    ang_t zn;
    always_comb begin
      xn = xs[s]; yn = ys[s]; zn = zs[s];
      for (int k = 0; k < ITERS_PER_STAGE; k++) begin
        automatic int   i  = s * ITERS_PER_STAGE + k;
        automatic dat_t xt = xn;
        if (zn >= 0) begin
          xn = xn - (yn >>> i);
          yn = yn + (xt >>> i);
          zn = zn - atan_step(i);
        end else begin
          xn = xn + (yn >>> i);
          yn = yn - (xt >>> i);
          zn = zn + atan_step(i);
        end
      end
    end
    if (s == NSTAGE - 1) begin : g_last
      logic signed [IW+17:0] xm, ym;
      always_comb begin
        xm = ((IW+18)'(xn) * (IW+18)'(KINV)) >>> 18;  // gain and guard bits
        ym = ((IW+18)'(yn) * (IW+18)'(KINV)) >>> 18;
      end
      always_ff @(posedge clk) begin
        if (rst) begin
          xs[s+1] <= '0; ys[s+1] <= '0; zs[s+1] <= '0; vs[s+1] <= 1'b0;
        end else begin
          xs[s+1] <= sat_w(xm); ys[s+1] <= sat_w(ym); zs[s+1] <= zn; vs[s+1] <= vs[s];
        end
      end
    end else begin : g_mid
      always_ff @(posedge clk) begin
        if (rst) begin
          xs[s+1] <= '0; ys[s+1] <= '0; zs[s+1] <= '0; vs[s+1] <= 1'b0;
        end else begin
          xs[s+1] <= xn; ys[s+1] <= yn; zs[s+1] <= zn; vs[s+1] <= vs[s];
        end
      end
    end
  end

  assign x_o     = W'(xs[NSTAGE]);
  assign y_o     = W'(ys[NSTAGE]);
  assign valid_o = vs[NSTAGE];

endmodule
