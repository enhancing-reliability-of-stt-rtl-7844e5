// tb_reap_cache_top: end-to-end test of the REAP L2 cache at its full size
// (1 MB, 8 ways, 64 B lines, 2048 sets, 523-bit codewords).
//
// A stream of random line reads and line writes is aimed at four sets
// (0, 1, 5 and the last) with twelve tags each, so that hits, misses, clean
// and dirty evictions all occur. A memory model behind the cache answers
// fills after a random delay and accepts requests on random cycles, so that
// requests are sometimes held. It checks every written-back line.
// Read disturbance is injected on most accesses: one bit of one random way of
// the set being read is cleared, a 1->0 flip. Without the per-way decoders
// and the write-back of corrected lines, these flips would pile up in lines
// that are read but not requested. With them, each line carries at most one
// flip at a time, so every read must return the last written data and no
// uncorrectable error may be reported.
// The testbench checks every read's data against a reference model and
// every write-back against that model too. It checks that a read hit is
// answered exactly one cycle after acceptance. It also counts each mechanism
// (read/write hit, read/write miss, dirty write-back, held memory request,
// correction of the requested line, correction of a concealed line, write-
// back of corrected lines) and fails if one of them never happened.
module tb_reap_cache_top;
  import reap_pkg::*;

  localparam int unsigned SETS = reap_pkg::SETS;
  localparam int unsigned WAYS = reap_pkg::WAYS;
  localparam int unsigned IW   = $clog2(SETS);
  localparam int unsigned TW   = ADDR_W - IW - OFFSET_W;
  localparam int unsigned BW   = $clog2(CW_W);
  localparam int          NOPS = 3000;

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
  int n_rd_hit = 0, n_wr_hit = 0, n_rd_miss = 0, n_wr_miss = 0, n_wb = 0;
  int n_mem_hold = 0, n_ce_req = 0, n_ce_concealed = 0, n_scrub = 0, n_ue = 0;
  int n_dist = 0;

  // ---------------- reference model ----------------
  logic [DATA_W-1:0] shadow [logic [ADDR_W-1:0]];  // last data written, by line
  logic [DATA_W-1:0] backing [logic [ADDR_W-1:0]]; // memory contents, by line

  function automatic logic [DATA_W-1:0] init_line(input logic [ADDR_W-1:0] a);
    logic [DATA_W-1:0] l;
    for (int k = 0; k < DATA_W / 32; k++) l[k*32 +: 32] = a * 32'h9E37_79B1 + k * 32'h7F4A_7C15;
    return l;
  endfunction

  function automatic logic [DATA_W-1:0] expected(input logic [ADDR_W-1:0] a);
    if (shadow.exists(a)) return shadow[a];
    return init_line(a);
  endfunction

  function automatic logic [DATA_W-1:0] rnd_line();
    logic [DATA_W-1:0] l;
    for (int k = 0; k < DATA_W / 32; k++) l[k*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic fail(input string what);
    failures++;
    if (failures < 10) $display("FAIL %s at %0t", what, $time);
  endtask

  // ---------------- memory model ----------------
  int                pend_cnt = 0;
  logic [ADDR_W-1:0] pend_addr;

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req.write) begin
        checks++;
        if (mem_req.wdata !== expected(mem_req.addr)) fail("write-back data");
        backing[mem_req.addr] = mem_req.wdata;
        n_wb++;
      end else begin
        pend_addr = mem_req.addr;
        pend_cnt  = 1 + int'($urandom % 4);
      end
    end else if (pend_cnt > 0) begin
      pend_cnt--;
      if (pend_cnt == 0) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= backing.exists(pend_addr) ? backing[pend_addr] : init_line(pend_addr);
      end
    end
    if (rst_n && mem_req_valid && !mem_req_ready) n_mem_hold++;
    mem_req_ready <= ($urandom % 3) != 0;
  end

  // ---------------- monitor ----------------
  always @(negedge clk) begin
    if (rst_n && stat_valid) begin
      int nce;
      nce = $countones(stat_ce_mask);
      if (resp_valid && resp.ce) begin
        n_ce_req++;
        nce--;
      end
      n_ce_concealed += nce;
      if (stat_scrub_mask != '0) n_scrub++;
      if (stat_ue_mask != '0) n_ue++;
    end
  end

  // ---------------- stimulus ----------------
  function automatic logic [ADDR_W-1:0] pick_addr();
    int unsigned s, t;
    logic [IW-1:0] idx;
    logic [TW-1:0] tag;
    s = $urandom % 4;
    idx = (s == 0) ? IW'(0) : (s == 1) ? IW'(1) : (s == 2) ? IW'(5) : IW'(SETS - 1);
    t = $urandom % 12;
    tag = TW'(t * 32'h0A5B + 3);
    return {tag, idx, OFFSET_W'($urandom)};
  endfunction

  initial begin
    req_valid = 0; req = '0; dist_en = 0; dist_way = 0; dist_bit = 0;
    mem_resp_rdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < NOPS; op++) begin
      logic [ADDR_W-1:0] a, line;
      int cyc;
      a    = pick_addr();
      line = {a[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
      @(negedge clk);
      checks++;
      if (!req_ready) fail("not ready between requests");
      req_valid = 1;
      req.write = ($urandom % 3) == 0;
      req.addr  = a;
      req.wdata = rnd_line();
      dist_en   = ($urandom % 4) != 0;
      dist_way  = $clog2(WAYS)'($urandom);
      dist_bit  = BW'($urandom % CW_W);
      if (dist_en) n_dist++;
      if (req.write) shadow[line] = req.wdata;
      @(negedge clk);
      req_valid = 0;
      dist_en   = 0;
      cyc = 1;
      if (!req.write) begin
        while (!resp_valid && cyc < 100) begin
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (!resp_valid) fail("no response");
        else begin
          checks++;
          if (resp.rdata !== expected(line)) fail($sformatf("read data, addr %h", line));
          checks++;
          if (resp.ue) fail("uncorrectable error on requested line");
          if (stat_hit) begin
            n_rd_hit++;
            checks++;
            if (cyc != 1) fail("read hit latency");
          end else n_rd_miss++;
        end
      end else begin
        if (stat_hit) n_wr_hit++;
        else n_wr_miss++;
        while (!req_ready && cyc < 100) begin
          @(negedge clk);
          cyc++;
        end
      end
    end
    // every mechanism must have been exercised
    checks++; if (n_rd_hit == 0) fail("no read hit");
    checks++; if (n_wr_hit == 0) fail("no write hit");
    checks++; if (n_rd_miss == 0) fail("no read miss");
    checks++; if (n_wr_miss == 0) fail("no write miss");
    checks++; if (n_wb == 0) fail("no dirty write-back");
    checks++; if (n_mem_hold == 0) fail("no held memory request");
    checks++; if (n_ce_req == 0) fail("no correction of a requested line");
    checks++; if (n_ce_concealed == 0) fail("no correction of a concealed line");
    checks++; if (n_scrub == 0) fail("no corrected line written back");
    checks++; if (n_ue != 0) fail("uncorrectable error in a valid line");
    $display("ops=%0d read hits=%0d write hits=%0d read misses=%0d write misses=%0d",
             NOPS, n_rd_hit, n_wr_hit, n_rd_miss, n_wr_miss);
    $display("disturbances=%0d requested-line corrections=%0d concealed-line corrections=%0d",
             n_dist, n_ce_req, n_ce_concealed);
    $display("lookups with write-back of corrected lines=%0d dirty write-backs=%0d held mem requests=%0d uncorrectable=%0d",
             n_scrub, n_wb, n_mem_hold, n_ue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NOPS * 40 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
