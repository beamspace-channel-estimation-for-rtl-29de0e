// sort_unit: streaming sorter of the beamspace magnitudes (B PEs in a row).
//
// Magnitudes of one vector enter one per cycle and are inserted in place, in
// descending order, so that PE-B holds the smallest. After the B-th value of
// a vector has entered, the vector is complete and its entries become stale:
// from the next cycle on PE-B hands one entry per cycle to the scan unit, in
// ascending order, while all entries shift one PE toward PE-B. The next
// vector can be loaded at the same time into the PEs freed at the top, so
// the sorter takes one value and gives one value per cycle without a buffer.
//
// Interface: in_valid/in_x carry the unsorted stream. A vector is the next B
// valid inputs; gaps between (or inside) vectors are allowed. out_valid/out_x
// give the sorted stream; the B values of a vector appear on B consecutive
// cycles, the first one in the cycle right after the vector's last input.
// out_first/out_last mark the first and last value of a sorted vector.
// Follows the paper: linear PE array, descending order, flush from PE-B.
// This design's choice: the vector tag that distinguishes the two vectors
// sharing the array, and the first/last markers.
module sort_unit
  import beaches_pkg::*;
#(
  parameter int unsigned B = B_DEFAULT
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [XW-1:0] in_x,
  output logic          out_valid,
  output logic          out_first,
  output logic          out_last,
  output logic [XW-1:0] out_x
);

  localparam int unsigned CW = $clog2(B + 1);

  sort_entry_t     ent [B+1];   // ent[0] is a constant empty entry
  logic [B:0]      cmp;
  logic            cur_gen;
  logic [CW-1:0]   in_cnt;
  logic [CW-1:0]   out_cnt;

  // cmp[B] (PE-B moves) is not needed outside: PE-B's stale entry is the output.
  assign ent[0] = '0;
  assign cmp[0] = 1'b0;

  for (genvar i = 1; i <= B; i++) begin : g_pe
    sort_pe u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .ins     (in_valid),
      .x       (in_x),
      .cur_gen (cur_gen),
      .prev_e  (ent[i-1]),
      .prev_cmp(cmp[i-1]),
      .e       (ent[i]),
      .cmp     (cmp[i])
    );
  end

  // Vector tag and input count: the tag flips with the B-th input.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_gen <= 1'b1;   // differs from the reset tag of the (empty) PEs
      in_cnt  <= '0;
    end else if (in_valid) begin
      if (in_cnt == CW'(B - 1)) begin
        in_cnt  <= '0;
        cur_gen <= ~cur_gen;
      end else begin
        in_cnt <= in_cnt + 1'b1;
      end
    end
  end

  // PE-B's entry leaves the array whenever it is valid and stale.
  assign out_valid = ent[B].valid && (ent[B].gen != cur_gen);
  assign out_x     = ent[B].val;
  assign out_first = out_valid && (out_cnt == '0);
  assign out_last  = out_valid && (out_cnt == CW'(B - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_cnt <= '0;
    end else if (out_valid) begin
      out_cnt <= (out_cnt == CW'(B - 1)) ? '0 : out_cnt + 1'b1;
    end
  end

endmodule
