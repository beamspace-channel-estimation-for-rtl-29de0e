// sbd_fifo: the SBD's FIFO buffer that holds the polar beamspace entries
// until the threshold of their vector is known.
//
// A circular buffer of DEPTH words (DEPTH = 2B+5 in the denoiser, as in the
// paper) with a write and a read port. Read data is registered: rd_data and
// rd_valid appear the cycle after rd_en. A write into a full FIFO is allowed
// when a read happens in the same cycle. Writing a full FIFO without a read,
// or reading an empty one, is an error that the assertions report; the
// denoiser never does either. The pointer-based organisation (rather than a
// fixed delay line) is this design's choice; it lets the input stream pause.
module sbd_fifo #(
  parameter int unsigned DEPTH = 2 * 256 + 5,
  parameter int unsigned W     = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned CNTW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      if (wr_en) wr_ptr <= next_ptr(wr_ptr);
      if (rd_en) rd_ptr <= next_ptr(rd_ptr);
      count <= count + CNTW'(wr_en) - CNTW'(rd_en);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en && !rd_en |-> count < CNTW'(DEPTH))
    else $error("sbd_fifo: write into a full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> count != '0)
    else $error("sbd_fifo: read from an empty FIFO");

endmodule
