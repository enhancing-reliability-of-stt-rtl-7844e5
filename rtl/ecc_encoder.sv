// ecc_encoder: SEC-DED encoder for one 512-bit cache line.
//
// Every line written into the STT-MRAM data array is stored together with its
// check bits ("Data+ECC" in each way). The code is an extended Hamming code:
// check bit c[j] is the XOR of all data bits whose Hamming position has bit j
// set, and the top bit is the parity of data plus check bits, so that a stored
// codeword always has even parity. The layout is given in reap_pkg.
//
// The code is systematic: the low 512 bits of cw are the data bits, wired
// straight through, and only the 11 top bits are computed.
// Purely combinational: cw is valid in the same cycle as data.
// The paper only says that lines are ECC protected and that the conventional
// code corrects a single bit error; the choice of an extended Hamming
// (SEC-DED) code and its bit layout is this design's.
module ecc_encoder
  import reap_pkg::*;
(
  input  logic [DATA_W-1:0]   data,
  output logic [CW_W-1:0] cw
);

  logic [HAM_R-1:0] chk;

  always_comb begin
    chk = '0;
    for (int unsigned i = 0; i < DATA_W; i++)
      if (data[i]) chk ^= DATA_POS[i];
    cw = {^{data, chk}, chk, data};
  end

endmodule
