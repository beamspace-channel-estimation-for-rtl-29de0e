// sas: sort-and-scan unit of the SURE-based denoiser.
//
// The magnitudes of each beamspace vector stream into the sort unit and, at
// the same time, into the scan unit, which accumulates the sum of their
// reciprocals. Once the vector's last magnitude has entered, the sort unit
// emits the B magnitudes in ascending order over B cycles and the scan unit
// evaluates SURE for each of them as a candidate threshold. The threshold of
// the smallest SURE is reported with a one-cycle tau_valid pulse. The next
// vector may be loaded while the previous one is scanned.
//
// Timing: with the vector's last magnitude on in_x in cycle T, the sorted
// values appear in cycles T+1 .. T+B and tau_valid pulses in cycle T+B+6.
// So, with back-to-back vectors, the first entry of a vector and the
// threshold for it are 2B+5 cycles apart: the depth of the paper's FIFO.
// Structure (sort unit feeding scan unit, scan also fed by the unsorted
// stream) follows the paper's figure.
module sas
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [XW-1:0]      in_x,
  input  logic [E0_W-1:0]    e0,
  output logic               tau_valid,
  output logic [XW-1:0]      tau,
  output logic signed [63:0] sure_min
);

  logic          s_valid, s_first, s_last;
  logic [XW-1:0] s_x;

  sort_unit #(.B(B)) u_sort (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_x     (in_x),
    .out_valid(s_valid),
    .out_first(s_first),
    .out_last (s_last),
    .out_x    (s_x)
  );

  scan_unit #(.B(B)) u_scan (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_x     (in_x),
    .s_valid  (s_valid),
    .s_first  (s_first),
    .s_last   (s_last),
    .s_x      (s_x),
    .e0       (e0),
    .tau_valid(tau_valid),
    .tau      (tau),
    .sure_min (sure_min)
  );

endmodule
