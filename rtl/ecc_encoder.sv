// ecc_encoder: adds the 12 parity bits to the 32 data bits (14-bit header and
// 18-bit payload) of a flit.
//
// Each 16-bit half of the data gets its own single-error-correcting,
// double-error-detecting code: five Hamming checks plus one overall parity
// bit. Two such codes fill the 12 parity bits of the 44-bit flit exactly.
// The choice of this particular code is this design's; the original design
// states only that a conventional ECC protects the data and gives the 12-bit
// parity budget.
//
// Purely combinational. Because the code is linear, encoding the XOR of an
// old and a new header gives the parity change needed to rewrite a header
// field without touching the other check bits (used when a router rewrites
// the next-port field).
module ecc_encoder
  import feto_pkg::*;
(
  input  logic [DATA_W-1:0] data_i,
  output logic [PAR_W-1:0]  parity_o,
  output flit_t             flit_o
);
  always_comb begin
    parity_o = ecc_parity(data_i);
    flit_o   = {parity_o, data_i};
  end
endmodule
