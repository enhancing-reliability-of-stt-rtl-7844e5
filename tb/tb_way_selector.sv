// tb_way_selector: drives every one-hot and the empty comparator pattern and
// checks hit, the one-hot select and the binary way index. It also drives
// random multi-hit patterns, where the lowest way must win.
module tb_way_selector;
  localparam int unsigned WAYS = reap_pkg::WAYS;
  localparam int unsigned WW   = $clog2(WAYS);
  logic [WAYS-1:0] match, sel;
  logic            hit;
  logic [WW-1:0]   way;
  int checks = 0, failures = 0;

  way_selector dut (.match, .hit, .sel, .way);

  initial begin
    match = '0;
    #1;
    checks++;
    if (hit !== 1'b0 || sel !== '0) failures++;
    for (int w = 0; w < WAYS; w++) begin
      match = WAYS'(1) << w;
      #1;
      checks++;
      if (hit !== 1'b1 || sel !== match || way !== WW'(w)) failures++;
    end
    for (int n = 0; n < 200; n++) begin
      int lo;
      match = WAYS'($urandom);
      if (match == '0) match = 1;
      lo = 0;
      while (!match[lo]) lo++;
      #1;
      checks++;
      if (hit !== 1'b1 || sel !== (WAYS'(1) << lo) || way !== WW'(lo)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
