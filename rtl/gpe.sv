// gpe: Gaussian processing element, the rendering datapath of one pixel.
//
// Rendering a Gaussian for a pixel is split into the two stages the
// accelerator's scheduling scheme relies on:
//   Stage 1, alpha computation (Eqn. 1), four clock cycles, no dependence on
//   earlier Gaussians, so it may be run for another GPE's pixel:
//     cycle 1  dx = mu_x - x, dy = mu_y - y
//     cycle 2  dx*dx, dx*dy, dy*dy
//     cycle 3  p = a/2*dx^2 + b*dx*dy + c/2*dy^2   (the quadratic form)
//     cycle 4  alpha = min(0.99, opacity * exp(-p))
//   exp(-p) is computed as 2^(-p*log2(e)): the integer part is a right shift,
//   the fractional part f a least-squares quadratic
//   2^-f ~ 0.99793 - 0.66738 f + 0.17133 f^2 (error below 0.21 %).
//   A negative p (outside the ellipse's valid side) gives alpha = 0.
//   Stage 2, colour rendering (Eqn. 2), one clock cycle, carries the
//   transmittance recurrence: a Gaussian with alpha below Thresh_alpha is
//   skipped and reported as non-contributory; if T*(1-alpha) would fall below
//   1e-4 the pixel terminates early; otherwise C += c*alpha*T, T *= 1-alpha.
// The formats are those of ags_pkg. The gradient pass of training is not part
// of this element (see the design notes).
//
// Interface: a_start (with a_feat, a_px, a_py) starts stage 1 when a_busy is
// low; a_done pulses with a_alpha four cycles later. b_valid (with b_alpha,
// b_col) runs stage 2 in the same cycle and updates the registered pixel
// state; b_nc and b_term are its combinational verdicts. clear restarts the
// pixel (T = 1, C = 0, term = 0) for a new tile.
module gpe
  import ags_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // stage 1
  input  logic               a_start,
  input  gfeat_t             a_feat,
  input  logic signed [15:0] a_px,
  input  logic signed [15:0] a_py,
  output logic               a_busy,
  output logic               a_done,
  output logic [15:0]        a_alpha,
  // stage 2
  input  logic               clear,
  input  logic [15:0]        thresh_alpha,
  input  logic               b_valid,
  input  logic [15:0]        b_alpha,
  input  rgb_t               b_col,
  output logic               b_nc,      // alpha < Thresh_alpha
  output logic               b_term,    // this Gaussian terminates the pixel
  output logic               term,      // pixel has terminated
  output logic [15:0]        trans,     // transmittance T
  output rgb_t               color      // accumulated colour C
);

  // ---------------- stage 1 ----------------
  logic [3:0]          stg;             // one-hot pipeline occupancy
  logic signed [16:0]  dx, dy;          // Q13.4
  logic signed [33:0]  dxx, dxy, dyy;   // Q26.8
  logic signed [15:0]  ca, cb, cc;
  logic        [15:0]  opac;
  logic        [15:0]  p88;             // p in Q8.8, saturated
  logic                pneg;

  logic signed [51:0]  pw_c;
  always_comb begin
    pw_c = ((52'(ca) * 52'(dxx)) >>> 1) + (52'(cb) * 52'(dxy)) + ((52'(cc) * 52'(dyy)) >>> 1);
  end

  // exp(-p) for p in Q8.8
  logic [31:0] y;        // p*log2e in Q8.8 (after >>15)
  logic [7:0]  fr;
  logic [23:0] ipart;
  logic [31:0] t1, t2;
  logic [31:0] e16;
  logic [15:0] e_sh;
  logic [31:0] al;
  always_comb begin
    y     = (32'(p88) * 32'd47274) >> 15;       // log2(e) = 1.4427 in Q1.15
    fr    = y[7:0];
    ipart = y[31:8];
    t1    = (32'd43738 * 32'(fr)) >> 8;
    t2    = (32'd11228 * 32'(fr) * 32'(fr)) >> 16;
    e16   = 32'd65400 - t1 + t2;
    e_sh  = (ipart >= 24'd16) ? 16'd0 : 16'(e16 >> ipart[3:0]);
    al    = (32'(opac) * 32'(e_sh)) >> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stg <= '0; dx <= '0; dy <= '0; dxx <= '0; dxy <= '0; dyy <= '0;
      ca <= '0; cb <= '0; cc <= '0; opac <= '0; p88 <= '0; pneg <= 1'b0;
      a_alpha <= '0;
    end else begin
      stg <= {stg[2:0], a_start && !a_busy};
      if (a_start && !a_busy) begin
        dx   <= 17'(a_feat.mx) - 17'(a_px);
        dy   <= 17'(a_feat.my) - 17'(a_py);
        ca   <= a_feat.ca;
        cb   <= a_feat.cb;
        cc   <= a_feat.cc;
        opac <= a_feat.opac;
      end
      if (stg[0]) begin
        dxx <= 34'(dx) * 34'(dx);
        dxy <= 34'(dx) * 34'(dy);
        dyy <= 34'(dy) * 34'(dy);
      end
      if (stg[1]) begin
        pneg <= pw_c < 0;
        // Q.20 -> Q8.8 with saturation
        p88  <= ((pw_c >>> 12) > 52'sd65535) ? 16'hFFFF : 16'(pw_c >>> 12);
      end
      if (stg[2]) begin
        if (pneg)                  a_alpha <= 16'd0;
        else if (al > 32'(ALPHA_MAX)) a_alpha <= ALPHA_MAX;
        else                       a_alpha <= al[15:0];
      end
    end
  end

  assign a_busy = |stg[2:0];
  assign a_done = stg[3];

  // ---------------- stage 2 ----------------
  logic [31:0] test_t;
  logic [15:0] at;        // alpha * T
  always_comb begin
    test_t = (32'(trans) * (32'd65536 - 32'(b_alpha))) >> 16;
    at     = 16'((32'(b_alpha) * 32'(trans)) >> 16);
    b_nc   = b_alpha < thresh_alpha;
    b_term = !b_nc && (test_t < 32'(T_MIN));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      term  <= 1'b0;
      trans <= 16'hFFFF;
      color <= '0;
    end else if (clear) begin
      term  <= 1'b0;
      trans <= 16'hFFFF;
      color <= '0;
    end else if (b_valid && !term && !b_nc) begin
      if (b_term) begin
        term <= 1'b1;
      end else begin
        trans   <= test_t[15:0];
        color.r <= color.r + 16'((32'(b_col.r) * 32'(at)) >> 16);
        color.g <= color.g + 16'((32'(b_col.g) * 32'(at)) >> 16);
        color.b <= color.b + 16'((32'(b_col.b) * 32'(at)) >> 16);
      end
    end
  end

endmodule
