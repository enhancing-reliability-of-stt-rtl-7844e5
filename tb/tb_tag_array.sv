// tb_tag_array: checks the tag store against a model kept in the testbench.
//
// After reset every valid and dirty bit must read 0. Then random single-way
// writes and parallel set reads are mixed. Each read must return the last
// written tag, valid and dirty bits of all ways of the set, in the cycle
// after the read. Uses a small array (16 sets).
module tb_tag_array;
  localparam int unsigned SETS = 16, WAYS = 8, TAG_W = 15;
  localparam int unsigned IW = $clog2(SETS), WW = $clog2(WAYS);

  logic clk = 0, rst_n = 0;
  logic re, we, wvalid, wdirty;
  logic [IW-1:0] rindex, windex;
  logic [WW-1:0] wway;
  logic [TAG_W-1:0] wtag;
  logic [WAYS-1:0][TAG_W-1:0] rd_tag;
  logic [WAYS-1:0] rd_valid, rd_dirty;
  int checks = 0, failures = 0;

  logic [TAG_W-1:0] m_tag [SETS][WAYS];
  logic             m_val [SETS][WAYS];
  logic             m_dir [SETS][WAYS];

  tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic read_check(input int s);
    @(negedge clk);
    re = 1; rindex = IW'(s); we = 0;
    @(negedge clk);
    re = 0;
    for (int w = 0; w < WAYS; w++) begin
      checks++;
      if (rd_valid[w] !== m_val[s][w] || rd_dirty[w] !== m_dir[s][w] ||
          (m_val[s][w] && rd_tag[w] !== m_tag[s][w])) begin
        failures++;
        if (failures < 5) $display("set %0d way %0d mismatch", s, w);
      end
    end
  endtask

  initial begin
    re = 0; we = 0; rindex = 0; windex = 0; wway = 0; wtag = 0; wvalid = 0; wdirty = 0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        m_val[s][w] = 0; m_dir[s][w] = 0; m_tag[s][w] = 0;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < SETS; s++) read_check(s);
    for (int n = 0; n < 600; n++) begin
      if ($urandom % 2) begin
        @(negedge clk);
        we = 1; windex = IW'($urandom); wway = WW'($urandom); wtag = TAG_W'($urandom);
        wvalid = 1'($urandom); wdirty = 1'($urandom);
        m_tag[windex][wway] = wtag; m_val[windex][wway] = wvalid; m_dir[windex][wway] = wdirty;
        @(negedge clk);
        we = 0;
      end else begin
        read_check($urandom % SETS);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
