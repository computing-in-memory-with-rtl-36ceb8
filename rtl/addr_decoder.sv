// addr_decoder: enhanced row address decoder of the STT-CiM array.
//
// Two ordinary one-hot row decoders, one per input address, whose outputs are
// OR-ed onto each wordline.  With one decoder enabled the array behaves as a
// normal memory (read or write of one row); with both enabled two rows are
// connected to every bit-line at once, which is what a compute-in-memory
// access needs.  The structure is the paper's; the separate enables are this
// design's way of switching a decoder off.  Combinational.
//
// Interface: addr_i/en_i and addr_j/en_j in, wl[ROWS] out (wl[r] = wordline r).
module addr_decoder #(
  parameter int ROWS   = 8192,
  parameter int ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic [ADDR_W-1:0] addr_i,
  input  logic              en_i,
  input  logic [ADDR_W-1:0] addr_j,
  input  logic              en_j,
  output logic [ROWS-1:0]   wl
);

  logic [ROWS-1:0] dec_i, dec_j;

  always_comb begin
    dec_i = '0;
    dec_j = '0;
    if (en_i) dec_i[addr_i] = 1'b1;
    if (en_j) dec_j[addr_j] = 1'b1;
    wl = dec_i | dec_j;
  end

endmodule
