// tb_sbd_sizes: runs the denoiser at the four antenna counts of the published
// FPGA results, B = 64, 128, 256 and 512, side by side. Each instance gets
// four back-to-back vectors of random sparse-plus-noise magnitudes and
// phases. Checks every threshold and output entry against the reference
// model and that every entry leaves 2B+8 cycles after it entered, i.e.
// 136, 264, 520 and 1032 cycles.
module tb_sbd_sizes;
  import beaches_pkg::*;
  import beaches_ref_pkg::*;

  localparam int unsigned NS = 4;
  localparam int unsigned SIZES [NS] = '{64, 128, 256, 512};
  localparam int unsigned NV = 4;

  logic clk = 0, rst_n = 0;
  longint cyc = 0;
  int checks [NS];
  int failures [NS];
  bit done [NS];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  for (genvar g = 0; g < int'(NS); g++) begin : g_size
    localparam int unsigned B = SIZES[g];
    logic in_valid, out_valid, out_first, out_last, tau_valid;
    polar_t in_s, out_s;
    logic [XW-1:0] tau;
    localparam logic [E0_W-1:0] E0 = E0_W'(20);
    int unsigned mags [NV][$];
    polar_t ents [NV][$];
    longint in_cyc [NV][$];
    int unsigned tau_ref [NV];

    beaches_sbd #(.B(B)) dut (.clk, .rst_n, .in_valid, .in_s, .e0(E0), .out_valid, .out_first,
                              .out_last, .out_s, .tau_valid, .tau);

    initial begin
      checks[g] = 0; failures[g] = 0; done[g] = 0;
      for (int v = 0; v < int'(NV); v++) begin
        longint sm;
        for (int i = 0; i < int'(B); i++) begin
          polar_t p;
          p.mag   = MAG_W'((i % 37 == v) ? $urandom_range(150, 500) : $urandom_range(0, 10));
          p.phase = PH_W'($urandom_range(0, 1023));
          ents[v].push_back(p);
          mags[v].push_back(int'(p.mag));
        end
        ref_tau(mags[v], longint'(E0), tau_ref[v], sm);
      end
      in_valid = 0; in_s = '0;
      @(posedge rst_n);
      for (int v = 0; v < int'(NV); v++)
        for (int i = 0; i < int'(B); i++) begin
          @(negedge clk);
          in_valid = 1; in_s = ents[v][i];
          in_cyc[v].push_back(cyc);
        end
      @(negedge clk) in_valid = 0;
    end

    initial begin
      int vt = 0;
      @(posedge rst_n);
      while (vt < int'(NV)) begin
        @(posedge clk);
        if (tau_valid) begin
          checks[g]++;
          if (int'(tau) != int'(tau_ref[vt])) begin
            failures[g]++;
            $display("FAIL B=%0d vec %0d tau %0d expected %0d", B, vt, tau, tau_ref[vt]);
          end
          vt++;
        end
      end
    end

    initial begin
      @(posedge rst_n);
      for (int v = 0; v < int'(NV); v++)
        for (int i = 0; i < int'(B); i++) begin
          @(posedge clk iff out_valid);
          checks[g] += 2;
          if (int'(out_s.mag) != int'(ref_shrink(mags[v][i], tau_ref[v])) || out_s.phase != ents[v][i].phase) begin
            failures[g]++;
            if (failures[g] < 5) $display("FAIL B=%0d vec %0d entry %0d", B, v, i);
          end
          if (cyc != in_cyc[v][i] + 2 * B + 8) begin
            failures[g]++;
            if (failures[g] < 5) $display("FAIL B=%0d latency %0d", B, cyc - in_cyc[v][i]);
          end
        end
      $display("B=%0d: latency %0d cycles checked, %0d checks, %0d failures", B, 2 * B + 8, checks[g], failures[g]);
      done[g] = 1;
    end
  end

  initial begin
    int c, f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    c = 0; f = 0;
    for (int s = 0; s < int'(NS); s++) begin c += checks[s]; f += failures[s]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    int c, f;
    repeat (20000) @(posedge clk);
    c = 0; f = 1;
    for (int s = 0; s < int'(NS); s++) begin c += checks[s]; f += failures[s]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
