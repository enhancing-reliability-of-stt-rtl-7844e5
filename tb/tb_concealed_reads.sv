// tb_concealed_reads: long runs of concealed reads on one set, the case in
// which a conventional cache piles up read-disturbance errors.
//
// All eight ways of one set are filled by line writes. Then one line (the
// "hot" line) is read 10,000 times in a row. Every read disturbs one random
// bit of one random way of the set. The seven other lines are therefore read
// 10,000 times each without being requested, and each takes about 1,250
// disturbance events. Lines with this many concealed reads are the ones that
// dominate the failure rate of a conventional cache. At the end every line of
// the set is read once. With a decoder per way and corrected lines written
// back, each line holds at most one flip at any time. So all data must be
// correct, no valid line may ever show an uncorrectable error, and every hot
// read must be a hit answered one cycle after acceptance. The cache runs at its
// full default size. The next memory level is never needed, and the test
// fails if it is used.
module tb_concealed_reads;
  import reap_pkg::*;

  localparam int unsigned SETS  = reap_pkg::SETS;
  localparam int unsigned WAYS  = reap_pkg::WAYS;
  localparam int unsigned IW    = $clog2(SETS);
  localparam int unsigned TW    = ADDR_W - IW - OFFSET_W;
  localparam int unsigned BW    = $clog2(CW_W);
  localparam int          NREAD = 10000;
  localparam logic [IW-1:0] SET = IW'(37);

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid;
  cache_req_t  req;
  cache_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  logic [DATA_W-1:0] mem_resp_rdata;
  logic dist_en;
  logic [$clog2(WAYS)-1:0] dist_way;
  logic [BW-1:0] dist_bit;
  logic stat_valid, stat_hit, stat_miss, stat_writeback;
  logic [WAYS-1:0] stat_scrub_mask, stat_ce_mask, stat_ue_mask;

  reap_cache_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_concealed_ce = 0, n_req_ce = 0, n_ue = 0, n_mem = 0;
  logic [DATA_W-1:0] lines [WAYS];

  assign mem_req_ready  = 1'b1;
  assign mem_resp_valid = 1'b0;
  assign mem_resp_rdata = '0;

  function automatic logic [ADDR_W-1:0] addr_of(input int t);
    return {TW'(t * 3 + 11), SET, {OFFSET_W{1'b0}}};
  endfunction

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s at %0t", what, $time);
  endtask

  always @(negedge clk) begin
    if (rst_n) begin
      if (mem_req_valid) n_mem++;
      if (stat_valid) begin
        int nce;
        nce = $countones(stat_ce_mask);
        if (resp_valid && resp.ce) begin
          n_req_ce++;
          nce--;
        end
        n_concealed_ce += nce;
        if (stat_ue_mask != '0) n_ue++;
      end
    end
  end

  // one access; returns the number of cycles to the answer (reads)
  task automatic access(input logic wr, input int t, input logic disturb, output int cyc);
    @(negedge clk);
    checks++;
    if (!req_ready) fail("not ready");
    req_valid = 1;
    req.write = wr;
    req.addr  = addr_of(t);
    req.wdata = lines[t];
    dist_en   = disturb;
    dist_way  = $clog2(WAYS)'($urandom);
    dist_bit  = BW'($urandom % CW_W);
    @(negedge clk);
    req_valid = 0;
    dist_en   = 0;
    cyc = 1;
    if (!wr) begin
      while (!resp_valid && cyc < 50) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (!resp_valid) fail("no answer");
      else begin
        checks++;
        if (resp.rdata !== lines[t]) fail($sformatf("data of line %0d", t));
        checks++;
        if (resp.ue) fail("uncorrectable requested line");
      end
    end else begin
      while (!req_ready && cyc < 50) begin
        @(negedge clk);
        cyc++;
      end
    end
  endtask

  initial begin
    int cyc;
    req_valid = 0; req = '0; dist_en = 0; dist_way = 0; dist_bit = 0;
    for (int t = 0; t < WAYS; t++)
      for (int k = 0; k < DATA_W / 32; k++) lines[t][k*32 +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill the set; the written lines are dense in ones so that most flips hit a 1
    for (int t = 0; t < WAYS; t++) begin
      lines[t] = lines[t] | (lines[t] >> 1);
      access(1'b1, t, 1'b0, cyc);
    end
    // hot line: NREAD hits, each disturbing the set
    for (int n = 0; n < NREAD; n++) begin
      access(1'b0, 0, 1'b1, cyc);
      checks++;
      if (cyc != 1) fail("hit latency");
    end
    // every other line, after NREAD concealed reads
    for (int t = 1; t < WAYS; t++) access(1'b0, t, 1'b0, cyc);
    checks++; if (n_ue != 0) fail("uncorrectable error in the set");
    checks++; if (n_concealed_ce == 0) fail("no concealed-line correction");
    checks++; if (n_mem != 0) fail("next level used");
    $display("concealed reads per non-requested line=%0d, concealed-line corrections=%0d, requested-line corrections=%0d, uncorrectable=%0d",
             NREAD, n_concealed_ce, n_req_ce, n_ue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NREAD * 10 + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
