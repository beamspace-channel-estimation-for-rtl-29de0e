// sort_pe: one processing element of the streaming insertion sorter.
//
// Each PE holds one entry (value, vector tag, valid). Every cycle the new
// input value is broadcast to all PEs. The PE's comparator raises 'cmp' when
// its own entry must move down the array: the entry is empty, belongs to an
// already complete vector (stale, being flushed), or is smaller than the new
// value. The control then loads the register from the multiplexer: the
// previous PE's entry if the previous PE also moves, else the new input.
// With cmp_in tied to 0 for the first PE, the array stays sorted in
// descending order (PE-1 largest). Equal values keep the older entry first.
// The register, multiplexer, comparator and control follow the PE-2 detail of
// the paper's sort-unit figure; the vector tag and valid bit, which let one
// vector flush while the next one loads, are this design's realisation of
// the flushing the paper describes.
//
// Timing: one register stage; 'cmp' is combinational from the register and
// the broadcast input.
module sort_pe
  import beaches_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ins,       // a new value is broadcast this cycle
  input  logic [XW-1:0] x,         // the broadcast value
  input  logic          cur_gen,   // tag of the vector being loaded
  input  sort_entry_t   prev_e,    // entry of the previous PE
  input  logic          prev_cmp,  // previous PE moves this cycle
  output sort_entry_t   e,         // this PE's entry
  output logic          cmp        // this PE's entry moves this cycle
);

  logic stale;
  assign stale = e.gen != cur_gen;
  assign cmp   = !e.valid || stale || (ins && (x > e.val));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0;
    end else if (cmp) begin
      e <= prev_cmp ? prev_e : sort_entry_t'{valid: ins, gen: cur_gen, val: x};
    end
  end

endmodule
