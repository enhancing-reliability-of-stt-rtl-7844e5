// ecc_decoder: SEC-DED decoder for one stored 523-bit line codeword.
//
// In the REAP cache one of these sits behind every way of the data array, in
// front of the way MUX, so that every line read in a set access is checked,
// not only the requested one. It computes the Hamming syndrome (XOR of the
// positions of all set bits) and the overall parity:
//   syndrome 0, parity even  -> no error
//   parity odd               -> single error at the syndrome position,
//                               corrected (syndrome 0: the parity bit itself)
//   syndrome != 0, even      -> double error, uncorrectable (ue)
//   odd, syndrome beyond the last code position -> uncorrectable (ue)
// Outputs are the corrected data, the corrected codeword (used by the cache to
// write the repaired line back) and the ce/ue flags. On ue the raw bits are
// passed on unchanged.
//
// Purely combinational. The paper requires a decoder that corrects a single
// bit error per line; the detection of double errors and the corrected
// codeword output are this design's additions.
module ecc_decoder
  import reap_pkg::*;
(
  input  logic [CW_W-1:0] cw_in,
  output logic [DATA_W-1:0]   data,
  output logic [CW_W-1:0] cw_corr,
  output logic            ce,
  output logic            ue
);

  logic [HAM_R-1:0] syn;
  logic             par;
  logic [CW_W-1:0]  flip;

  always_comb begin
    syn = cw_in[DATA_W +: HAM_R];
    for (int unsigned i = 0; i < DATA_W; i++)
      if (cw_in[i]) syn ^= DATA_POS[i];
    par  = ^cw_in;
    flip = '0;
    ce   = 1'b0;
    ue   = 1'b0;
    if (par) begin
      if (syn == '0) begin
        flip[CW_W-1] = 1'b1;
        ce = 1'b1;
      end else if (32'(syn) > MAX_POS) begin
        ue = 1'b1;
      end else begin
        ce = 1'b1;
        for (int unsigned j = 0; j < HAM_R; j++)
          if (32'(syn) == (32'd1 << j)) flip[DATA_W + j] = 1'b1;
        for (int unsigned i = 0; i < DATA_W; i++)
          if (syn == DATA_POS[i]) flip[i] = 1'b1;
      end
    end else if (syn != '0) begin
      ue = 1'b1;
    end
    cw_corr = cw_in ^ flip;
    data    = cw_corr[DATA_W-1:0];
  end

endmodule
