// beaches_sbd: SURE-based denoiser (SBD) of the BEACHES channel estimator.
//
// Input is the stream of polar beamspace entries (magnitude |y_k|, phase) of
// one channel vector after another, one entry per cycle, B entries per
// vector. For each vector the sort-and-scan unit (sas) determines the
// threshold tau* that minimises Stein's unbiased risk estimate (SURE) of the
// soft-thresholding error; meanwhile a FIFO of depth 2B+5 holds the entries.
// When tau* is known, the vector's entries are read from the FIFO and
// soft-thresholded: |h_k| = max(|y_k| - tau*, 0), phase unchanged. The output
// goes to the polar-to-Cartesian conversion and IFFT (beamspace-to-antenna
// conversion), which lie outside this module, as does the FFT and
// Cartesian-to-polar conversion (antenna-to-beamspace) that feeds it.
//
// Interface:
//   in_valid, in_s   one polar entry; the magnitude is non-negative (its sign
//                    bit must be 0). Every B valid entries form a vector.
//   e0               noise variance E0/B of the scaled beamspace, 16 bits with
//                    15 fraction bits, held constant during operation.
//   out_valid, out_s denoised entry; out_first/out_last mark a vector.
//   tau_valid, tau   the threshold of a vector, once per vector.
// Timing: with vectors streamed back to back, entry k leaves exactly 2B+8
// cycles after it entered (input register 1, FIFO delay 2B+5, FIFO read 1,
// soft-threshold register 1), the SBD latency the paper reports for
// B = 64...512. Gaps in the input stream are allowed; in every case the
// first entry of a vector leaves B+9 cycles after its last entry entered and
// the B entries leave on consecutive cycles.
// Follows the paper: SAS, FIFO of depth 2B+5, subtractor and multiplexer.
// This design's choices: the input register, the read controller, the
// first/last markers and the tolerance of gaps.
module beaches_sbd
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  polar_t          in_s,
  input  logic [E0_W-1:0] e0,
  output logic            out_valid,
  output logic            out_first,
  output logic            out_last,
  output polar_t          out_s,
  output logic            tau_valid,
  output logic [XW-1:0]   tau
);

  localparam int unsigned DEPTH = 2 * B + 5;
  localparam int unsigned CW    = $clog2(B + 1);

  // ---------------- input register ----------------
  logic            in_v_q;
  polar_t          in_s_q;
  logic [E0_W-1:0] e0_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_v_q <= 1'b0;
      in_s_q <= '0;
      e0_q   <= '0;
    end else begin
      in_v_q <= in_valid;
      e0_q   <= e0;
      if (in_valid) in_s_q <= in_s;
    end
  end

  // ---------------- sort and scan ----------------
  sas #(.B(B)) u_sas (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_v_q),
    .in_x     (in_s_q.mag[XW-1:0]),
    .e0       (e0_q),
    .tau_valid(tau_valid),
    .tau      (tau),
    .sure_min ()
  );

  // ---------------- FIFO buffer ----------------
  logic                       rd_en, rd_valid;
  polar_t                     rd_s;

  sbd_fifo #(.DEPTH(DEPTH), .W($bits(polar_t))) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (in_v_q),
    .wr_data (in_s_q),
    .rd_en   (rd_en),
    .rd_valid(rd_valid),
    .rd_data (rd_s),
    .count   ()
  );

  // ---------------- read controller ----------------
  // tau_valid starts the read of the vector's B entries on B consecutive
  // cycles; the threshold is held for them.
  logic [CW-1:0] rd_left;
  logic [XW-1:0] tau_hold;
  logic          rd_first_q, rd_last_q;

  assign rd_en = tau_valid || (rd_left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_left    <= '0;
      tau_hold   <= '0;
      rd_first_q <= 1'b0;
      rd_last_q  <= 1'b0;
    end else begin
      rd_first_q <= tau_valid;
      rd_last_q  <= rd_en && (tau_valid ? (B == 1) : (rd_left == CW'(1)));
      if (tau_valid) begin
        tau_hold <= tau;
        rd_left  <= CW'(B - 1);
      end else if (rd_left != '0) begin
        rd_left <= rd_left - 1'b1;
      end
    end
  end

  // ---------------- soft thresholding ----------------
  soft_threshold u_thr (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rd_valid),
    .in_s      (rd_s),
    .tau       (tau_hold),
    .out_valid (out_valid),
    .out_s     (out_s),
    .out_zeroed()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_first <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_first <= rd_first_q;
      out_last  <= rd_last_q;
    end
  end

  a_mag_nonneg: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !in_s.mag[MAG_W-1])
    else $error("beaches_sbd: negative magnitude at the input");
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    tau_valid |-> rd_left == '0)
    else $error("beaches_sbd: new threshold while the previous vector is read");

endmodule
