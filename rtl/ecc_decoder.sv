// ecc_decoder: checks a received 44-bit flit and corrects it where it can.
//
// Each 16-bit half is decoded separately (SEC-DED): the Hamming syndrome
// points at a single flipped bit, the overall parity tells a single error
// (odd) from a double one (even). A single error in either half is corrected;
// an error that cannot be corrected sets arq_o, which the input port turns
// into an Automatic Retransmission Request to the upstream router instead of
// writing the flit into its buffer, as the original design describes.
//
// Purely combinational. flit_o carries the corrected data with its parity
// regenerated, so a corrected flit leaves the router clean.
module ecc_decoder
  import feto_pkg::*;
(
  input  flit_t       flit_i,
  output flit_t       flit_o,
  output ecc_status_e status_o,
  output logic        corrected_o,
  output logic        arq_o
);
  logic [DATA_W-1:0] data_in;
  logic [DATA_W-1:0] data_fix;
  logic [1:0]        half_err;   // single (correctable) error per half
  logic [1:0]        half_bad;   // uncorrectable per half

  always_comb begin
    data_in  = {flit_i.hdr, flit_i.payload};
    data_fix = data_in;
    half_err = '0;
    half_bad = '0;
    for (int h = 0; h < 2; h++) begin
      logic [15:0] d;
      logic [5:0]  p;
      logic [4:0]  syn;
      logic        ovr;
      d   = data_in[16*h +: 16];
      p   = flit_i.parity[6*h +: 6];
      syn = ham_checks(d) ^ p[4:0];
      ovr = ^{d, p};
      if (ovr) begin
        // Odd number of flips: a single error, unless the syndrome points
        // outside the 21 code positions.
        if (syn > 5'd21) begin
          half_bad[h] = 1'b1;
        end else begin
          half_err[h] = 1'b1;
          for (int unsigned k = 0; k < 16; k++)
            if (ham_pos(k) == 32'(syn)) d[k] = ~d[k];
        end
      end else if (syn != '0) begin
        half_bad[h] = 1'b1;
      end
      data_fix[16*h +: 16] = d;
    end
    arq_o       = |half_bad;
    corrected_o = !arq_o && |half_err;
    status_o    = arq_o ? ECC_ARQ : (corrected_o ? ECC_CORRECTED : ECC_OK);
    flit_o      = arq_o ? flit_i : {ecc_parity(data_fix), data_fix};
  end
endmodule
