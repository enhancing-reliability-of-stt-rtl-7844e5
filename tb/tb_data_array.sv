// tb_data_array: checks the (Data+ECC) line store against a model kept in
// the testbench.
//
// Random masked multi-way writes and parallel set reads are mixed. Every
// read must return the codewords of all ways in the next cycle. A read with
// dist_en set must still return the value sensed before the flip, and later
// reads must see that bit cleared. This is the 1->0 read-disturbance model.
// Uses a small array (8 sets) with full-width 523-bit codewords.
module tb_data_array;
  localparam int unsigned SETS = 8, WAYS = 8, CW = reap_pkg::CW_W;
  localparam int unsigned IW = $clog2(SETS), WW = $clog2(WAYS), BW = $clog2(CW);

  logic clk = 0;
  logic re, dist_en;
  logic [IW-1:0] rindex, windex;
  logic [WAYS-1:0][CW-1:0] rdata, wdata;
  logic [WAYS-1:0] we_mask;
  logic [WW-1:0] dist_way;
  logic [BW-1:0] dist_bit;
  int checks = 0, failures = 0, n_flips = 0;

  logic [WAYS-1:0][CW-1:0] m [SETS];

  data_array #(.SETS(SETS), .WAYS(WAYS), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [CW-1:0] rnd_cw();
    logic [CW-1:0] v;
    for (int k = 0; k < CW; k += 32) v[k +: 32] = $urandom;
    return v;
  endfunction

  task automatic wr_set(input int s, input logic [WAYS-1:0] mask);
    @(negedge clk);
    re = 0; windex = IW'(s); we_mask = mask;
    for (int w = 0; w < WAYS; w++) begin
      wdata[w] = rnd_cw();
      if (mask[w]) m[s][w] = wdata[w];
    end
    @(negedge clk);
    we_mask = '0;
  endtask

  task automatic rd_set(input int s, input logic with_dist);
    @(negedge clk);
    re = 1; rindex = IW'(s); dist_en = with_dist;
    dist_way = WW'($urandom); dist_bit = BW'($urandom % CW);
    @(negedge clk);
    re = 0; dist_en = 0;
    checks++;
    if (rdata !== m[s]) begin
      failures++;
      if (failures < 5) $display("read set %0d mismatch", s);
    end
    if (with_dist) begin
      if (m[s][dist_way][dist_bit]) n_flips++;
      m[s][dist_way][dist_bit] = 1'b0;
    end
  endtask

  initial begin
    re = 0; dist_en = 0; we_mask = '0; rindex = 0; windex = 0; wdata = '0;
    dist_way = 0; dist_bit = 0;
    for (int s = 0; s < SETS; s++) wr_set(s, '1);
    for (int n = 0; n < 400; n++) begin
      int unsigned op;
      op = $urandom % 3;
      if (op == 0) wr_set($urandom % SETS, WAYS'($urandom));
      else rd_set($urandom % SETS, op == 2);
    end
    for (int s = 0; s < SETS; s++) begin
      rd_set(s, 1'b0);
    end
    // a disturbance must actually have cleared some 1 bits
    checks++;
    failures += int'(n_flips == 0);
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
