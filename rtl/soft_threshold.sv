// soft_threshold: applies the shrinkage of one polar beamspace entry.
//
// |h| = |y| - tau if |y| > tau, else 0; the phase passes unchanged. This is
// the paper's subtractor and multiplexer (the mux selects 0 when the
// difference would be negative). In polar form the complex soft-thresholding
// function only touches the magnitude. The result is registered: out_* is
// valid one cycle after in_valid. The output register is this design's
// choice. Bit MAG_W-1 (the sign bit) of out_s.mag is always 0, since a
// magnitude is never negative; it is kept so that the output has the same
// 10-bit format as the input.
module soft_threshold
  import beaches_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  polar_t        in_s,
  input  logic [XW-1:0] tau,
  output logic          out_valid,
  output polar_t        out_s,
  output logic          out_zeroed    // the entry was set to zero
);

  logic [XW:0] diff;   // one extra bit: the borrow is the mux select
  assign diff = {1'b0, in_s.mag[XW-1:0]} - {1'b0, tau};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_s      <= '0;
      out_zeroed <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_s.phase <= in_s.phase;
        out_s.mag   <= (diff[XW] || diff == '0) ? '0 : MAG_W'(diff[XW-1:0]);
        out_zeroed  <= diff[XW] || diff == '0;
      end
    end
  end

endmodule
