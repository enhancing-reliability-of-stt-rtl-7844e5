// way_selector: turns the k comparator outputs into the hit signal and the
// select lines of the k:1 MUX.
//
// In a correct cache at most one way matches. sel is the one-hot select of the
// hit way (all zero on a miss) and way is its binary index. If more than one
// way matched, the lowest one would be taken. That case is an error, and the
// cache controller asserts that it does not happen.
// Combinational. The paper names the unit and its role. The priority choice
// and the binary index output are this design's.
module way_selector #(
  parameter int unsigned WAYS = reap_pkg::WAYS,
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0] match,
  output logic            hit,
  output logic [WAYS-1:0] sel,
  output logic [WW-1:0]   way
);

  always_comb begin
    hit = 1'b0;
    sel = '0;
    way = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (match[w] && !hit) begin
        hit    = 1'b1;
        sel[w] = 1'b1;
        way    = WW'(w);
      end
    end
  end

endmodule
