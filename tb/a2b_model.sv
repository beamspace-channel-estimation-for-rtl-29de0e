// a2b_model: behavioural model (not synthesizable) of the antenna-to-
// beamspace conversion that feeds the denoiser: a streaming B-point FFT that
// scales by 1/2 in each of its log2(B) stages, followed by a vectoring CORDIC.
// In hardware both are vendor IP cores; this model only reproduces their
// function for simulation. It collects the B antenna-domain entries of a
// vector (16 bits, 8 fraction bits, real and imaginary part), computes
//   y_hat_k = (1/B) sum_n y_n exp(-j 2 pi n k / B)
// in floating point, and emits one polar entry per cycle, starting the cycle
// after the vector's last input: magnitude rounded to 8 fraction bits and
// limited to 511/256, phase in units of pi rounded to 8 fraction bits.
// Vectors streamed back to back come out back to back.
module a2b_model
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic               clk,
  input  logic               in_valid,
  input  logic signed [15:0] in_re,
  input  logic signed [15:0] in_im,
  output logic               out_valid,
  output polar_t             out_s
);
  localparam real PI = 3.14159265358979323846;

  real    buf_re [B];
  real    buf_im [B];
  int     n_in = 0;
  polar_t outq [$];

  initial begin
    out_valid = 1'b0;
    out_s     = '0;
  end

  always @(posedge clk) begin
    if (outq.size() > 0) begin
      out_valid <= 1'b1;
      out_s     <= outq.pop_front();
    end else begin
      out_valid <= 1'b0;
    end
    if (in_valid) begin
      buf_re[n_in] = real'(in_re) / 256.0;
      buf_im[n_in] = real'(in_im) / 256.0;
      n_in++;
      if (n_in == int'(B)) begin
        n_in = 0;
        for (int k = 0; k < int'(B); k++) begin
          real sr, si, m, p, a;
          polar_t s;
          sr = 0.0; si = 0.0;
          for (int n = 0; n < int'(B); n++) begin
            a  = -2.0 * PI * real'((n * k) % int'(B)) / real'(B);
            sr += buf_re[n] * $cos(a) - buf_im[n] * $sin(a);
            si += buf_re[n] * $sin(a) + buf_im[n] * $cos(a);
          end
          sr /= real'(B); si /= real'(B);
          m = $sqrt(sr * sr + si * si) * 256.0 + 0.5;
          if (m > 511.0) m = 511.0;
          p = $atan2(si, sr) / PI * 256.0;
          s.mag   = MAG_W'($rtoi(m));
          s.phase = PH_W'($rtoi(p + ((p >= 0.0) ? 0.5 : -0.5)));
          outq.push_back(s);
        end
      end
    end
  end
endmodule
