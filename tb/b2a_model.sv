// b2a_model: behavioural model (not synthesizable) of the beamspace-to-
// antenna conversion after the denoiser: a rotation CORDIC (polar to
// Cartesian) followed by an unscaled streaming IFFT. In hardware both are
// vendor IP cores; this model only reproduces their function. It collects
// the B denoised polar entries of a vector (magnitude with 8 fraction bits,
// phase in units of pi with 8 fraction bits), computes
//   h_n = sum_k h_hat_k exp(+j 2 pi n k / B)
// in floating point and emits one antenna entry per cycle (16 bits, 8
// fraction bits, rounded and saturated), starting the cycle after the last
// input. It also offers the unrounded result to the testbench (out_re_r,
// out_im_r).
module b2a_model
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic               clk,
  input  logic               in_valid,
  input  polar_t             in_s,
  output logic               out_valid,
  output logic signed [15:0] out_re,
  output logic signed [15:0] out_im,
  output real                out_re_r,
  output real                out_im_r
);
  localparam real PI = 3.14159265358979323846;

  real buf_re [B];
  real buf_im [B];
  int  n_in = 0;
  real q_re [$];
  real q_im [$];

  function automatic logic signed [15:0] to_fix(real v);
    real s;
    s = v * 256.0;
    s = s + ((s >= 0.0) ? 0.5 : -0.5);
    if (s > 32767.0)  s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return 16'($rtoi(s));
  endfunction

  initial begin
    out_valid = 1'b0; out_re = '0; out_im = '0; out_re_r = 0.0; out_im_r = 0.0;
  end

  always @(posedge clk) begin
    if (q_re.size() > 0) begin
      real r, i;
      r = q_re.pop_front();
      i = q_im.pop_front();
      out_valid <= 1'b1;
      out_re    <= to_fix(r);
      out_im    <= to_fix(i);
      out_re_r  <= r;
      out_im_r  <= i;
    end else begin
      out_valid <= 1'b0;
    end
    if (in_valid) begin
      real m, p;
      m = real'(in_s.mag) / 256.0;
      p = real'($signed(in_s.phase)) / 256.0 * PI;
      buf_re[n_in] = m * $cos(p);
      buf_im[n_in] = m * $sin(p);
      n_in++;
      if (n_in == int'(B)) begin
        n_in = 0;
        for (int n = 0; n < int'(B); n++) begin
          real sr, si, a;
          sr = 0.0; si = 0.0;
          for (int k = 0; k < int'(B); k++) begin
            a  = 2.0 * PI * real'((n * k) % int'(B)) / real'(B);
            sr += buf_re[k] * $cos(a) - buf_im[k] * $sin(a);
            si += buf_re[k] * $sin(a) + buf_im[k] * $cos(a);
          end
          q_re.push_back(sr);
          q_im.push_back(si);
        end
      end
    end
  end
endmodule
