// way_mux: the k:1 MUX of the read path.
//
// In the REAP cache the MUX comes after the k ECC decoders, so it chooses among
// lines that have already been checked and corrected. The way selector's
// one-hot sel picks the line that leaves the cache. With sel all zero (a miss)
// the output is zero.
// Combinational AND-OR mux. The paper gives the MUX and its place after the
// decoders. The one-hot AND-OR form is this design's choice.
module way_mux #(
  parameter int unsigned WAYS = reap_pkg::WAYS,
  parameter int unsigned W    = reap_pkg::DATA_W
) (
  input  logic [WAYS-1:0]        sel,
  input  logic [WAYS-1:0][W-1:0] din,
  output logic [W-1:0]           dout
);

  always_comb begin
    dout = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (sel[w]) dout |= din[w];
  end

endmodule
