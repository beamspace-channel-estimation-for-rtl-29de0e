// scan_unit: finds the SURE-minimising shrinkage threshold tau* of a vector.
//
// Hardware version of BEACHES (lines 4-14 of the algorithm, simplified): for
// the sorted magnitudes y_1 <= ... <= y_B the candidate threshold in step k
// is tau = y_k itself, and the SURE value, multiplied by B and without its
// constant E0 term, is
//   SURE_k = S_k + (B-k+1)*tau^2 - E0*tau*V_k - 2*E0*(k-1),
//   S_k = sum_{b<k} y_b^2,   V_k = sum_{b>=k} 1/y_b.
// The threshold of the first strictly smallest SURE_k is kept.
//
// V_1 is the sum of reciprocals of all B entries. It is accumulated from the
// unsorted input stream while the vector loads into the sorter, so it is
// ready when the first sorted value arrives; during the scan V is decreased
// by 1/y_k after each step. Reciprocals come from the 512-entry table; the
// unsorted and the sorted stream each need one read per cycle, since one
// vector loads while the previous one is scanned, so the table is
// instantiated twice (one ROM with two read ports).
//
// e0 is the noise variance in the scaled beamspace domain (E0/B in antenna
// terms), 16 bits with 15 fraction bits; it is assumed constant while a
// vector is scanned. All products and sums keep full precision: every SURE
// term is aligned to D_FRAC fraction bits, so no rounding affects the choice.
//
// Pipeline (this design's choice; the paper omits its pipeline registers):
//   s1 register sorted value and its reciprocal, step index k
//   s2 tau^2, tau*V_k, B-k+1, k-1; update V
//   s3 S_k + (B-k+1)tau^2, E0*(tau*V_k), 2*E0*(k-1); update S
//   s4 E0*tau*V_k + 2*E0*(k-1)
//   s5 SURE_k
// The compare-and-keep registers follow s5. tau_valid pulses 6 cycles after
// the last sorted value of a vector was presented, with tau and sure_min.
module scan_unit
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic                clk,
  input  logic                rst_n,
  // unsorted stream (for the initial V)
  input  logic                in_valid,
  input  logic [XW-1:0]       in_x,
  // sorted stream from the sort unit
  input  logic                s_valid,
  input  logic                s_first,
  input  logic                s_last,
  input  logic [XW-1:0]       s_x,
  input  logic [E0_W-1:0]     e0,
  output logic                tau_valid,
  output logic [XW-1:0]       tau,
  output logic signed [63:0]  sure_min     // B*SURE - B*E0 of tau, 2^-D_FRAC units
);

  localparam int unsigned CW     = $clog2(B + 1);         // k and B-k+1
  localparam int unsigned VW     = RECIP_W + $clog2(B);   // V
  localparam int unsigned SQW    = 2 * XW;                // tau^2
  localparam int unsigned SW     = SQW + $clog2(B);       // S
  localparam int unsigned TVW    = XW + VW;               // tau*V
  localparam int unsigned AW     = SQW + CW + 1 + A_SHIFT;// S + (B-k+1)tau^2, aligned
  localparam int unsigned DW     = E0_W + TVW + 1;        // E0*tau*V + 2E0(k-1)
  localparam int unsigned SUREW  = ((AW > DW) ? AW : DW) + 1;

  // ---------------- initial V from the unsorted stream ----------------
  logic [RECIP_W-1:0] in_r, s_r;
  logic [VW-1:0]      vacc, vtot;
  logic [CW-1:0]      in_cnt;

  recip_lut u_lut_in  (.idx(in_x), .recip(in_r));
  recip_lut u_lut_srt (.idx(s_x),  .recip(s_r));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vacc   <= '0;
      vtot   <= '0;
      in_cnt <= '0;
    end else if (in_valid) begin
      if (in_cnt == CW'(B - 1)) begin
        in_cnt <= '0;
        vtot   <= vacc + VW'(in_r);
        vacc   <= '0;
      end else begin
        in_cnt <= in_cnt + 1'b1;
        vacc   <= vacc + VW'(in_r);
      end
    end
  end

  // ---------------- s1 ----------------
  logic               v1, f1, l1;
  logic [XW-1:0]      x1;
  logic [RECIP_W-1:0] r1;
  logic [CW-1:0]      k1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; x1 <= '0; r1 <= '0; k1 <= '0;
    end else begin
      v1 <= s_valid;
      f1 <= s_first;
      l1 <= s_last;
      if (s_valid) begin
        x1 <= s_x;
        r1 <= s_r;
        k1 <= s_first ? CW'(1) : k1 + 1'b1;
      end
    end
  end

  // ---------------- s2 ----------------
  logic               v2, f2, l2;
  logic [XW-1:0]      x2;
  logic [SQW-1:0]     sq2;
  logic [TVW-1:0]     tv2;
  logic [CW-1:0]      bk2, km2;
  logic [VW-1:0]      vreg, vuse;

  assign vuse = f1 ? vtot : vreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; x2 <= '0; sq2 <= '0; tv2 <= '0;
      bk2 <= '0; km2 <= '0; vreg <= '0;
    end else begin
      v2 <= v1;
      f2 <= f1;
      l2 <= l1;
      if (v1) begin
        x2   <= x1;
        sq2  <= SQW'(x1) * SQW'(x1);
        tv2  <= TVW'(x1) * TVW'(vuse);
        bk2  <= CW'(B) - k1 + 1'b1;
        km2  <= k1 - 1'b1;
        vreg <= vuse - VW'(r1);
      end
    end
  end

  // ---------------- s3 ----------------
  logic               v3, l3;
  logic [XW-1:0]      x3;
  logic [AW-1:0]      a3;
  logic [DW-1:0]      etv3, ek3;
  logic [SW-1:0]      sreg, suse;

  assign suse = f2 ? '0 : sreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0; l3 <= 1'b0; x3 <= '0; a3 <= '0; etv3 <= '0; ek3 <= '0; sreg <= '0;
    end else begin
      v3 <= v2;
      l3 <= l2;
      if (v2) begin
        x3   <= x2;
        a3   <= (AW'(suse) + AW'(bk2) * AW'(sq2)) << A_SHIFT;
        etv3 <= DW'(e0) * DW'(tv2);
        ek3  <= (DW'(e0) * DW'(km2)) << K_SHIFT;
        sreg <= suse + SW'(sq2);
      end
    end
  end

  // ---------------- s4 ----------------
  logic               v4, l4;
  logic [XW-1:0]      x4;
  logic [AW-1:0]      a4;
  logic [DW-1:0]      d4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4 <= 1'b0; l4 <= 1'b0; x4 <= '0; a4 <= '0; d4 <= '0;
    end else begin
      v4 <= v3;
      l4 <= l3;
      if (v3) begin
        x4 <= x3;
        a4 <= a3;
        d4 <= etv3 + ek3;
      end
    end
  end

  // ---------------- s5 ----------------
  logic                    v5, l5, f5;
  logic [XW-1:0]           x5;
  logic signed [SUREW-1:0] sure5;
  logic                    f3, f4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f3 <= 1'b0; f4 <= 1'b0;
      v5 <= 1'b0; l5 <= 1'b0; f5 <= 1'b0; x5 <= '0; sure5 <= '0;
    end else begin
      f3 <= f2;
      f4 <= f3;
      v5 <= v4;
      l5 <= l4;
      f5 <= f4;
      if (v4) begin
        x5    <= x4;
        sure5 <= $signed(SUREW'(a4)) - $signed(SUREW'(d4));
      end
    end
  end

  // ---------------- compare and keep ----------------
  logic signed [SUREW-1:0] min_q;
  logic [XW-1:0]           tau_q;
  logic                    better;

  assign better = f5 || (sure5 < min_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min_q     <= '0;
      tau_q     <= '0;
      tau_valid <= 1'b0;
      tau       <= '0;
      sure_min  <= '0;
    end else begin
      tau_valid <= 1'b0;
      if (v5) begin
        if (better) begin
          min_q <= sure5;
          tau_q <= x5;
        end
        if (l5) begin
          tau_valid <= 1'b1;
          tau       <= better ? x5 : tau_q;
          sure_min  <= 64'(better ? sure5 : min_q);
        end
      end
    end
  end

endmodule
