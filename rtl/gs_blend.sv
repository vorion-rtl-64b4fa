// gs_blend: the combinational core of stage 3 of a raster lane - front-to-back
// compositing of one Gaussian into one pixel.
//
//     test_T = T * (1 - alpha)
//     if test_T >= 1e-4:  C += T * alpha * c  (per channel),  T = test_T
//     else:               the pixel is finished (transmittance collapsed)
//
// A finished pixel is marked by the sign bit of its stored T: T < 0 means
// "done, final transmittance |T|". Later Gaussians leave such a pixel alone,
// which gives the early termination the design relies on. The 1e-4 threshold
// is the reference software's; the sign-bit flag is this design's choice, so
// that the 4-word (R,G,B,T) pixel needs no extra bit.
//
// Interface: pure combinational. collapsed is high in the call that
// terminates the pixel.
module gs_blend
  import vorion_pkg::*;
(
  input  rpix_t      pix_in,
  input  f32_t       alpha,
  input  logic       skip,
  input  f32_t [2:0] color,
  output rpix_t      pix_out,
  output logic       collapsed
);
  f32_t test_t, ta;
  always_comb begin
    pix_out   = pix_in;
    collapsed = 1'b0;
    test_t    = fmul(pix_in.t, fsub(F_ONE, alpha));
    ta        = fmul(pix_in.t, alpha);
    if (!skip && !pix_in.t[31]) begin
      if (flt(test_t, F_T_MIN)) begin
        pix_out.t = fneg(pix_in.t);
        collapsed = 1'b1;
      end else begin
        for (int ch = 0; ch < 3; ch++)
          pix_out.c[ch] = fadd(pix_in.c[ch], fmul(ta, color[ch]));
        pix_out.t = test_t;
      end
    end
  end
endmodule
