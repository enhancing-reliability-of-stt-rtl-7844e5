// tb_cache_ctrl: drives the controller's lookup and memory inputs by hand and
// checks every control output against the expected sequence:
//   read hit with a corrected error in another way (answer one cycle after
//   acceptance, corrected line written back), write hit (new line into the
//   hit way, dirty tag, the other corrected way written back), clean read miss
//   into the first invalid way with a slow memory (request held until
//   ready), dirty read miss with round-robin victim (write-back, then fill),
//   and dirty write miss (write-back, then the line is written with no fill).
module tb_cache_ctrl;
  localparam int unsigned WAYS = 8, WW = 3;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_write, req_ready, req_latch, arr_re;
  logic hit; logic [WW-1:0] hit_way;
  logic [WAYS-1:0] way_valid, way_dirty, ce_mask;
  logic lookup;
  logic [WAYS-1:0] data_we_mask, data_new_mask, scrub_mask;
  logic new_from_mem, tag_we, tag_wdirty;
  logic [WW-1:0] tag_wway, victim_way;
  logic resp_valid, resp_from_mem;
  logic mem_req_valid, mem_req_write, mem_req_ready, mem_resp_valid;
  logic evt_hit, evt_miss, evt_writeback;
  int checks = 0, failures = 0;

  cache_ctrl #(.WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic idle_inputs();
    req_valid = 0; req_write = 0; hit = 0; hit_way = 0;
    way_valid = '0; way_dirty = '0; ce_mask = '0;
    mem_req_ready = 0; mem_resp_valid = 0;
  endtask

  // present a request in IDLE; returns in the LOOKUP cycle (at negedge)
  task automatic issue(input logic wr);
    @(negedge clk);
    idle_inputs();
    chk(req_ready, "ready in idle");
    req_valid = 1; req_write = wr;
    #1 chk(req_latch && arr_re, "latch and array read on accept");
    @(negedge clk);
    req_valid = 0;
    chk(lookup, "lookup one cycle after accept");
  endtask

  initial begin
    idle_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1: read hit on way 3, way 5 had a corrected error
    issue(0);
    hit = 1; hit_way = 3; way_valid = '1; ce_mask = 8'b0010_0000;
    #1;
    chk(resp_valid && !resp_from_mem, "read hit answered in lookup");
    chk(scrub_mask == 8'b0010_0000 && data_we_mask == 8'b0010_0000 && data_new_mask == 0,
        "corrected way written back");
    chk(evt_hit && !evt_miss && !tag_we && !mem_req_valid, "hit events");

    // 2: write hit on way 2, ways 2 and 0 corrected
    issue(1);
    hit = 1; hit_way = 2; way_valid = '1; ce_mask = 8'b0000_0101;
    #1;
    chk(!resp_valid, "no answer to a write");
    chk(data_new_mask == 8'b0000_0100 && scrub_mask == 8'b0000_0001 &&
        data_we_mask == 8'b0000_0101, "write hit masks");
    chk(tag_we && tag_wway == 2 && tag_wdirty, "dirty bit set");

    // 3: clean read miss, ways 0 and 1 valid -> victim 2, slow memory
    issue(0);
    hit = 0; way_valid = 8'b0000_0011; way_dirty = 8'b0000_0011;
    #1;
    chk(evt_miss && victim_way == 2 && !resp_valid, "miss, first invalid way");
    @(negedge clk);
    idle_inputs();
    chk(mem_req_valid && !mem_req_write, "fill request");
    @(negedge clk);
    chk(mem_req_valid && !mem_req_write, "fill request held");
    mem_req_ready = 1;
    @(negedge clk);
    mem_req_ready = 0;
    chk(!mem_req_valid && !resp_valid, "waiting for fill");
    @(negedge clk);
    mem_resp_valid = 1;
    #1;
    chk(resp_valid && resp_from_mem && new_from_mem, "fill answered");
    chk(data_we_mask == 8'b0000_0100 && data_new_mask == 8'b0000_0100, "fill written to way 2");
    chk(tag_we && tag_wway == 2 && !tag_wdirty, "clean tag");

    // 4: dirty read miss, all valid -> round-robin victim 0, write-back first
    issue(0);
    hit = 0; way_valid = '1; way_dirty = '1;
    #1;
    chk(victim_way == 0, "round-robin victim 0");
    @(negedge clk);
    idle_inputs();
    chk(mem_req_valid && mem_req_write && victim_way == 0, "write-back request");
    mem_req_ready = 1;
    #1 chk(evt_writeback, "write-back event");
    @(negedge clk);
    chk(mem_req_valid && !mem_req_write, "fill after write-back");
    @(negedge clk);
    mem_req_ready = 0;
    mem_resp_valid = 1;
    #1 chk(resp_valid && data_we_mask == 8'b0000_0001, "fill into way 0");

    // 5: dirty write miss -> victim 1, write-back, then write without fill
    issue(1);
    hit = 0; way_valid = '1; way_dirty = '1;
    #1 chk(victim_way == 1, "round-robin victim 1");
    @(negedge clk);
    idle_inputs();
    mem_req_ready = 1;
    #1 chk(mem_req_valid && mem_req_write, "write-back on write miss");
    @(negedge clk);
    mem_req_ready = 0;
    chk(!mem_req_valid && data_new_mask == 8'b0000_0010 && tag_we && tag_wdirty,
        "write miss allocates without fill");
    @(negedge clk);
    chk(req_ready, "back to idle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
