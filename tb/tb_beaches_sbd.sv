// tb_beaches_sbd: end-to-end test of the denoiser with every parameter at its
// default (B = 256 antennas), between behavioural models of the
// antenna-to-beamspace and beamspace-to-antenna conversions.
//
// It estimates one channel matrix of U = 16 users: 16 channel vectors, each
// a sum of plane waves (eq. "h = sum alpha_l a(Omega_l)") observed in complex
// Gaussian noise of variance E0 per entry. Vectors alternate between a
// line-of-sight type (one strong path, two weak ones) and a non-line-of-sight
// type (six weaker paths). The first eight vectors are streamed back to back,
// the rest with pauses between them.
// Checks:
//   - every denoised entry (magnitude and phase) against the reference model
//     applied to the same polar entries, and every tau*;
//   - every entry leaves exactly 2B+8 cycles after it entered, vectors come
//     out with correct first/last markers;
//   - the antenna-domain estimate is closer to the true channel than the
//     noisy observation (mean-square error over the matrix at least 2x lower);
//   - the mechanisms of the design each occur: flushing one vector while the
//     next loads, input pauses, the FIFO at its full depth 2B+5, entries set
//     to zero and entries shrunk, thresholds found past the smallest entry.
module tb_beaches_sbd;
  import beaches_pkg::*;
  import beaches_ref_pkg::*;

  localparam int unsigned B   = B_DEFAULT;
  localparam int unsigned NV  = 16;
  localparam real         E0A = 0.25;      // noise variance per antenna entry
  localparam real         PI  = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic y_valid;
  logic signed [15:0] y_re, y_im;
  logic a_valid;
  polar_t a_s;
  logic o_valid, o_first, o_last, tau_valid;
  polar_t o_s;
  logic [XW-1:0] tau;
  logic h_valid;
  logic signed [15:0] h_re, h_im;
  real h_re_r, h_im_r;
  logic [E0_W-1:0] e0;

  int checks = 0, failures = 0;
  longint cyc = 0;

  real    ht_re [NV][B], ht_im [NV][B];     // true channel
  real    yq_re [NV][B], yq_im [NV][B];     // quantised observation
  int unsigned in_mag [NV][$];
  polar_t in_pol [NV][$];
  longint in_cyc [NV][$];
  int     tau_ref [NV];

  int n_flush_load = 0, n_pause = 0, n_fifo_full = 0, n_zero = 0, n_shrink = 0, n_tau_inner = 0;
  real mse_noisy = 0.0, mse_den = 0.0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  a2b_model u_a2b (.clk, .in_valid(y_valid), .in_re(y_re), .in_im(y_im), .out_valid(a_valid), .out_s(a_s));

  beaches_sbd dut (
    .clk, .rst_n, .in_valid(a_valid), .in_s(a_s), .e0,
    .out_valid(o_valid), .out_first(o_first), .out_last(o_last), .out_s(o_s),
    .tau_valid, .tau
  );

  b2a_model u_b2a (.clk, .in_valid(o_valid), .in_s(o_s), .out_valid(h_valid),
                   .out_re(h_re), .out_im(h_im), .out_re_r(h_re_r), .out_im_r(h_im_r));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic real urand();
    return (real'($urandom_range(1, 1000000)) / 1000001.0);
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  function automatic real q88(real v);
    real s;
    s = v * 256.0;
    s = s + ((s >= 0.0) ? 0.5 : -0.5);
    return real'($rtoi(s)) / 256.0;
  endfunction

  // channel generation
  initial begin
    for (int v = 0; v < NV; v++) begin
      int   npath;
      real  amp [6], om [6], ph [6];
      npath = (v % 2 == 0) ? 3 : 6;
      for (int l = 0; l < npath; l++) begin
        om[l]  = 2.0 * PI * urand();
        ph[l]  = 2.0 * PI * urand();
        amp[l] = (v % 2 == 0) ? ((l == 0) ? 0.8 + 0.4 * urand() : 0.1 + 0.2 * urand())
                              : 0.15 + 0.25 * urand();
      end
      for (int n = 0; n < int'(B); n++) begin
        real re, im;
        re = 0.0; im = 0.0;
        for (int l = 0; l < npath; l++) begin
          re += amp[l] * $cos(om[l] * n + ph[l]);
          im += amp[l] * $sin(om[l] * n + ph[l]);
        end
        ht_re[v][n] = re;
        ht_im[v][n] = im;
        yq_re[v][n] = q88(re + $sqrt(E0A / 2.0) * gauss());
        yq_im[v][n] = q88(im + $sqrt(E0A / 2.0) * gauss());
      end
    end
  end

  // antenna-domain driver
  initial begin
    y_valid = 0; y_re = '0; y_im = '0;
    e0 = E0_W'($rtoi(E0A / real'(B) * 32768.0 + 0.5));
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      if (v >= 8 && v % 2 == 0) begin
        n_pause++;
        repeat ($urandom_range(1, 3 * B)) @(negedge clk) y_valid = 0;
      end
      for (int n = 0; n < int'(B); n++) begin
        @(negedge clk);
        y_valid = 1;
        y_re = 16'($rtoi(yq_re[v][n] * 256.0));
        y_im = 16'($rtoi(yq_im[v][n] * 256.0));
      end
    end
    @(negedge clk) y_valid = 0;
  end

  // record what enters the denoiser
  int vin = 0;
  always @(posedge clk) begin
    if (rst_n && a_valid && vin < int'(NV)) begin
      in_mag[vin].push_back(int'(a_s.mag));
      in_pol[vin].push_back(a_s);
      in_cyc[vin].push_back(cyc);
      if (in_mag[vin].size() == B) begin
        int unsigned t; longint sm;
        int unsigned srt [$];
        ref_tau(in_mag[vin], longint'(e0), t, sm);
        tau_ref[vin] = int'(t);
        srt = in_mag[vin]; srt.sort();
        if (t != srt[0]) n_tau_inner++;
        vin++;
      end
    end
  end

  // mechanism counters
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_sas.u_sort.out_valid && dut.in_v_q) n_flush_load++;
      if (int'(dut.u_fifo.count) == 2 * B + 5) n_fifo_full++;
    end
  end

  // threshold check
  int vtau = 0;
  always @(posedge clk) begin
    if (rst_n && tau_valid) begin
      check(int'(tau) == tau_ref[vtau], $sformatf("vec %0d tau %0d expected %0d", vtau, tau, tau_ref[vtau]));
      vtau++;
    end
  end

  // denoised beamspace output check
  int vout = 0, iout = 0;
  always @(posedge clk) begin
    if (rst_n && o_valid && vout < int'(NV)) begin
      int unsigned em;
      em = ref_shrink(in_mag[vout][iout], tau_ref[vout]);
      if (em == 0) n_zero++; else n_shrink++;
      check(int'(o_s.mag) == int'(em) && o_s.phase == in_pol[vout][iout].phase,
            $sformatf("vec %0d entry %0d got %0d/%0d expected %0d/%0d", vout, iout,
                      o_s.mag, o_s.phase, em, in_pol[vout][iout].phase));
      check(cyc == in_cyc[vout][iout] + 2 * B + 8,
            $sformatf("vec %0d entry %0d latency %0d", vout, iout, cyc - in_cyc[vout][iout]));
      check(o_first == (iout == 0) && o_last == (iout == int'(B) - 1), "first/last markers");
      iout++;
      if (iout == int'(B)) begin iout = 0; vout++; end
    end
  end

  // antenna-domain result
  int vh = 0, ih = 0;
  initial begin
    @(posedge rst_n);
    while (vh < int'(NV)) begin
      @(posedge clk);
      if (h_valid) begin
        real dr, di;
        dr = h_re_r - ht_re[vh][ih]; di = h_im_r - ht_im[vh][ih];
        mse_den += dr * dr + di * di;
        dr = yq_re[vh][ih] - ht_re[vh][ih]; di = yq_im[vh][ih] - ht_im[vh][ih];
        mse_noisy += dr * dr + di * di;
        ih++;
        if (ih == int'(B)) begin ih = 0; vh++; end
      end
    end
    mse_den /= real'(NV * B);
    mse_noisy /= real'(NV * B);
    $display("MSE noisy %f denoised %f (gain %f)", mse_noisy, mse_den, mse_noisy / mse_den);
    check(mse_den * 2.0 < mse_noisy, "denoising lowers the MSE at least 2x");
    check(vout == int'(NV) && vtau == int'(NV), "all vectors and thresholds seen");
    $display("mechanisms: flush-while-load %0d cycles, pauses %0d, FIFO full %0d cycles, zeroed %0d, shrunk %0d, inner tau %0d",
             n_flush_load, n_pause, n_fifo_full, n_zero, n_shrink, n_tau_inner);
    check(n_flush_load > 0, "flush while loading occurred");
    check(n_pause > 0, "input pause occurred");
    check(n_fifo_full > 0, "FIFO reached depth 2B+5");
    check(n_zero > 0, "entries set to zero");
    check(n_shrink > 0, "entries shrunk");
    check(n_tau_inner > 0, "threshold past the smallest entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40 * B + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
