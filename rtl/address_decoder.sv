// address_decoder: row decoder and wordline drivers of the OISMA array.
//
// Turns a row address into one-hot wordlines; at most one wordline is active
// at a time, as in the paper, and none while the enable is low. The
// controller raises the enable only in the phase where the bitcells must
// conduct (floating & sensing for read/AND, programming for write). In the
// chip one decoder sits between the two 128x128 sub-arrays and drives both;
// the wordline drivers are folded in here as plain logic. Combinational.
module address_decoder #(
  parameter int unsigned ROWS = 128
) (
  input  logic [$clog2(ROWS)-1:0] addr,
  input  logic                    en,
  output logic [ROWS-1:0]         wl
);
  always_comb begin
    wl = '0;
    if (en && (32'(addr) < ROWS)) wl[addr] = 1'b1;
  end
endmodule
