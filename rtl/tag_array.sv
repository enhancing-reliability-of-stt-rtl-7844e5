// tag_array: tag store of the set-associative cache, with valid and dirty bits.
//
// On a lookup, the tags of all k ways of the addressed set are read in
// parallel. They feed the k tag comparators, as in the cache organisation the
// REAP scheme starts from. The read is synchronous: re with rindex at one
// clock edge gives rd_tag/rd_valid/rd_dirty of every way from the next cycle
// until the next read. One way at a time is written (we, windex, wway), either
// on a line fill or to set the dirty bit on a write hit.
// The tags are held in a memory array. The valid and dirty bits are kept in
// flip-flops, so that rst_n can clear them: after reset every line is invalid.
// The paper shows only a tag array with k tags per set. The status bits, the
// single write port and the one-cycle read are this design's choices.
module tag_array #(
  parameter int unsigned SETS  = reap_pkg::SETS,
  parameter int unsigned WAYS  = reap_pkg::WAYS,
  parameter int unsigned TAG_W = reap_pkg::TAG_W,
  localparam int unsigned IW   = $clog2(SETS),
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // parallel read of one set
  input  logic                       re,
  input  logic [IW-1:0]              rindex,
  output logic [WAYS-1:0][TAG_W-1:0] rd_tag,
  output logic [WAYS-1:0]            rd_valid,
  output logic [WAYS-1:0]            rd_dirty,
  // write of one way
  input  logic                       we,
  input  logic [IW-1:0]              windex,
  input  logic [WW-1:0]              wway,
  input  logic [TAG_W-1:0]           wtag,
  input  logic                       wvalid,
  input  logic                       wdirty
);

  logic [WAYS-1:0][TAG_W-1:0] tags  [SETS];
  logic [WAYS-1:0]            valid [SETS];
  logic [WAYS-1:0]            dirty [SETS];

  // tag memory: no reset, entries are only used once valid
  always_ff @(posedge clk) begin
    if (we) tags[windex][wway] <= wtag;
    if (re) rd_tag <= tags[rindex];
  end

  // status bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
      end
      rd_valid <= '0;
      rd_dirty <= '0;
    end else begin
      if (we) begin
        valid[windex][wway] <= wvalid;
        dirty[windex][wway] <= wdirty;
      end
      if (re) begin
        rd_valid <= valid[rindex];
        rd_dirty <= dirty[rindex];
      end
    end
  end

endmodule
