// reap_cache_top: REAP (Read Error Accumulation Preventer) STT-MRAM L2 cache.
//
// A set-associative cache that reads all k lines of a set in parallel with
// the tag comparison (fast, parallel access). In STT-MRAM every read may flip
// a stored '1' to '0' (read disturbance). A conventional cache ECC-checks only
// the requested line, after the way MUX. The other k-1 lines were also read
// ("concealed reads"), so their flips are never checked and pile up until the
// line gets more errors than the ECC can correct. REAP moves the ECC decoder in
// front of the MUX and gives every way its own decoder. All k lines read by an
// access are then checked in that access. Here every line in which a decoder
// corrected an error is also written back corrected, in the same cycle. So a
// line never carries more than the errors of one read.
//
// Read path (per request, see cache_ctrl for the full sequence):
//   cycle 0 (IDLE)    request accepted, index drives tag_array and data_array
//   cycle 1 (LOOKUP)  k tag comparators + way selector in parallel with
//                     k ECC decoders; k:1 MUX of decoded lines; read hit
//                     answered (resp_valid); corrected lines written back
// Misses go to the next level through mem_req/mem_resp, whole lines at a time.
// Default geometry (reap_pkg): 1 MB, 8 ways, 64 B lines, 2048 sets, 523-bit
// SEC-DED codewords.
//
// dist_en/dist_way/dist_bit model read disturbance for verification. They
// clear one bit of one way of the set read in the current cycle (tie low in
// use). stat_* report, for every lookup, hit or miss, the ways whose decoder
// corrected (ce) or detected an uncorrectable error (ue), and the ways whose
// corrected line was written back (scrub).
//
// The swap of MUX and decoder, the k decoders and the parallel access follow
// the paper. The code (extended Hamming), the correction write-back, the
// controller, the replacement policy and the interfaces are this design's.
module reap_cache_top #(
  parameter int unsigned SETS = reap_pkg::SETS,
  parameter int unsigned WAYS = reap_pkg::WAYS,
  localparam int unsigned IW  = $clog2(SETS),
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TW  = reap_pkg::ADDR_W - IW - reap_pkg::OFFSET_W,
  localparam int unsigned BW  = $clog2(reap_pkg::CW_W)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // requests from the level above
  input  logic                          req_valid,
  output logic                          req_ready,
  input  reap_pkg::cache_req_t          req,
  output logic                          resp_valid,
  output reap_pkg::cache_resp_t         resp,
  // next memory level
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output reap_pkg::mem_req_t            mem_req,
  input  logic                          mem_resp_valid,
  input  logic [reap_pkg::DATA_W-1:0]   mem_resp_rdata,
  // read-disturbance model
  input  logic                          dist_en,
  input  logic [WW-1:0]                 dist_way,
  input  logic [BW-1:0]                 dist_bit,
  // per-lookup status
  output logic                          stat_valid,
  output logic                          stat_hit,
  output logic                          stat_miss,
  output logic [WAYS-1:0]               stat_scrub_mask,
  output logic [WAYS-1:0]               stat_ce_mask,
  output logic [WAYS-1:0]               stat_ue_mask,
  output logic                          stat_writeback
);

  import reap_pkg::*;

  // ---------------- request register and address fields ----------------
  cache_req_t lat_q;
  logic       req_latch;
  logic [IW-1:0] rd_index, cur_index;
  logic [TW-1:0] cur_tag;

  always_ff @(posedge clk) begin
    if (req_latch) lat_q <= req;
  end

  assign rd_index  = req.addr[OFFSET_W +: IW];
  assign cur_index = lat_q.addr[OFFSET_W +: IW];
  assign cur_tag   = lat_q.addr[ADDR_W-1 -: TW];

  // ---------------- arrays ----------------
  logic                      arr_re;
  logic [WAYS-1:0][TW-1:0]   way_tag;
  logic [WAYS-1:0]           way_valid, way_dirty;
  logic [WAYS-1:0][CW_W-1:0] way_cw;
  logic                      tag_we, tag_wdirty;
  logic [WW-1:0]             tag_wway;
  logic [WAYS-1:0]           data_we_mask, data_new_mask, scrub_mask;
  logic [WAYS-1:0][CW_W-1:0] data_wdata;

  tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TW)) u_tag_array (
    .clk, .rst_n,
    .re(arr_re), .rindex(rd_index),
    .rd_tag(way_tag), .rd_valid(way_valid), .rd_dirty(way_dirty),
    .we(tag_we), .windex(cur_index), .wway(tag_wway), .wtag(cur_tag),
    .wvalid(1'b1), .wdirty(tag_wdirty)
  );

  data_array #(.SETS(SETS), .WAYS(WAYS), .CW(CW_W)) u_data_array (
    .clk,
    .re(arr_re), .rindex(rd_index), .rdata(way_cw),
    .we_mask(data_we_mask), .windex(cur_index), .wdata(data_wdata),
    .dist_en, .dist_way, .dist_bit
  );

  // ---------------- tag side: k comparators and way selector ----------------
  logic [WAYS-1:0] match, sel;
  logic            hit;
  logic [WW-1:0]   hit_way;

  for (genvar w = 0; w < WAYS; w++) begin : g_cmp
    tag_comparator #(.TAG_W(TW)) u_cmp (
      .valid(way_valid[w]), .stored_tag(way_tag[w]), .addr_tag(cur_tag),
      .match(match[w])
    );
  end

  way_selector #(.WAYS(WAYS)) u_way_sel (
    .match, .hit, .sel, .way(hit_way)
  );

  // ---------------- data side: k ECC decoders, then the k:1 MUX ----------------
  logic [WAYS-1:0][DATA_W-1:0] dec_data;
  logic [WAYS-1:0][CW_W-1:0]   dec_cw;
  logic [WAYS-1:0]             dec_ce, dec_ue;
  logic [DATA_W-1:0]           mux_data;

  for (genvar w = 0; w < WAYS; w++) begin : g_dec
    ecc_decoder u_dec (
      .cw_in(way_cw[w]), .data(dec_data[w]), .cw_corr(dec_cw[w]),
      .ce(dec_ce[w]), .ue(dec_ue[w])
    );
  end

  way_mux #(.WAYS(WAYS), .W(DATA_W)) u_way_mux (
    .sel, .din(dec_data), .dout(mux_data)
  );

  // ---------------- write side: one encoder for new lines ----------------
  logic              new_from_mem;
  logic [CW_W-1:0]   new_cw;

  ecc_encoder u_enc (
    .data(new_from_mem ? mem_resp_rdata : lat_q.wdata),
    .cw(new_cw)
  );

  always_comb begin
    for (int unsigned w = 0; w < WAYS; w++)
      data_wdata[w] = data_new_mask[w] ? new_cw : dec_cw[w];
  end

  // ---------------- controller ----------------
  logic            lookup, resp_from_mem, mem_req_write;
  logic [WW-1:0]   victim_way;
  logic            evt_hit, evt_miss, evt_writeback;

  cache_ctrl #(.WAYS(WAYS)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_write(req.write), .req_ready, .req_latch,
    .arr_re,
    .hit, .hit_way, .way_valid, .way_dirty, .ce_mask(dec_ce),
    .lookup,
    .data_we_mask, .data_new_mask, .new_from_mem, .scrub_mask,
    .tag_we, .tag_wway, .tag_wdirty,
    .resp_valid, .resp_from_mem,
    .mem_req_valid, .mem_req_write, .mem_req_ready, .mem_resp_valid,
    .victim_way,
    .evt_hit, .evt_miss, .evt_writeback
  );

  // ---------------- outputs ----------------
  always_comb begin
    resp.rdata = resp_from_mem ? mem_resp_rdata : mux_data;
    resp.ce    = !resp_from_mem && |(sel & dec_ce);
    resp.ue    = !resp_from_mem && |(sel & dec_ue);

    mem_req.write = mem_req_write;
    mem_req.wdata = dec_data[victim_way];
    mem_req.addr  = mem_req_write
                  ? {way_tag[victim_way], cur_index, {OFFSET_W{1'b0}}}
                  : {cur_tag, cur_index, {OFFSET_W{1'b0}}};
  end

  assign stat_valid     = lookup;
  assign stat_hit       = evt_hit;
  assign stat_miss      = evt_miss;
  assign stat_scrub_mask = scrub_mask;
  assign stat_ce_mask   = lookup ? (dec_ce & way_valid) : '0;
  assign stat_ue_mask   = lookup ? (dec_ue & way_valid) : '0;
  assign stat_writeback = evt_writeback;

  // At most one way may hold a given tag.
  a_onehot_hit: assert property (@(posedge clk) disable iff (!rst_n)
    lookup |-> $onehot0(match));

endmodule
