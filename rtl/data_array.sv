// data_array: STT-MRAM data array, k ways of (Data+ECC) lines per set.
//
// A lookup reads the stored codewords of all k ways of the addressed set in
// parallel. This is the parallel (fast) access in which the tag comparison
// overlaps the data read. Every one of those k reads can disturb the cells it
// reads. The read is synchronous: re with rindex at one edge gives rdata of all
// ways from the next cycle on, until the next read. Writes take a per-way
// enable mask with one codeword per way, so a line fill, a write hit and the
// write-back of corrected lines can all be done in one cycle.
//
// Read disturbance: STT-MRAM cells are read with the current flowing in the
// direction that writes '0', so a read can only flip a stored '1' to '0'. The
// dist_* inputs model that physical effect for verification: when dist_en is
// high during a read, bit dist_bit of way dist_way in the set being read is
// cleared. The read returns the value sensed before the flip. In a real
// macro these inputs do not exist and are tied low.
//
// The array is written as a plain memory. The paper gives its organisation
// (k ways of Data+ECC per set, all read together) and the one-way
// disturbance; the port structure and timing are this design's.
module data_array #(
  parameter int unsigned SETS = reap_pkg::SETS,
  parameter int unsigned WAYS = reap_pkg::WAYS,
  parameter int unsigned CW   = reap_pkg::CW_W,
  localparam int unsigned IW  = $clog2(SETS),
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned BW  = $clog2(CW)
) (
  input  logic                    clk,
  // parallel read of one set
  input  logic                    re,
  input  logic [IW-1:0]           rindex,
  output logic [WAYS-1:0][CW-1:0] rdata,
  // write, any subset of the ways of one set
  input  logic [WAYS-1:0]         we_mask,
  input  logic [IW-1:0]           windex,
  input  logic [WAYS-1:0][CW-1:0] wdata,
  // read-disturbance model (1 -> 0 flip during a read)
  input  logic                    dist_en,
  input  logic [WW-1:0]           dist_way,
  input  logic [BW-1:0]           dist_bit
);

  logic [WAYS-1:0][CW-1:0] mem [SETS];

  always_ff @(posedge clk) begin
    if (re) begin
      rdata <= mem[rindex];
      if (dist_en) mem[rindex][dist_way][dist_bit] <= 1'b0;
    end
    for (int unsigned w = 0; w < WAYS; w++)
      if (we_mask[w]) mem[windex][w] <= wdata[w];
  end

endmodule
