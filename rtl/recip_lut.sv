// recip_lut: reciprocal look-up table of the scan unit.
//
// Maps a 9-bit magnitude x (8 fraction bits, so x = idx/256) to 1/x as a
// 12-bit number with 2 fraction bits. The paper gives the table size (512
// entries) and the entry format; the contents are this design's: each entry
// is 1/x rounded to the nearest multiple of 1/4, i.e.
//   lut[idx] = round(1024 / idx) = (2048 + idx) / (2 * idx)   for idx >= 1,
// and the largest code, 4095 (= 1023.75), for idx = 0, where 1/x has no
// value. The table is computed at elaboration time, so it synthesizes to a
// ROM. Combinational read: the caller registers the result.
module recip_lut
  import beaches_pkg::*;
(
  input  logic [XW-1:0]      idx,
  output logic [RECIP_W-1:0] recip
);

  typedef logic [RECIP_W-1:0] table_t [LUT_DEPTH];

  function automatic table_t gen_table();
    table_t t;
    for (int i = 0; i < int'(LUT_DEPTH); i++) begin
      if (i == 0) t[i] = '1;
      else        t[i] = RECIP_W'((2048 + i) / (2 * i));
    end
    return t;
  endfunction

  localparam table_t TABLE = gen_table();

  assign recip = TABLE[idx];

endmodule
