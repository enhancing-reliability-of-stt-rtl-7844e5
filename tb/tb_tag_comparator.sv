// tb_tag_comparator: checks that one way matches only when its line is
// valid and its stored tag equals the address tag, on random and equal tags.
module tb_tag_comparator;
  localparam int unsigned TAG_W = reap_pkg::TAG_W;
  logic             valid, match;
  logic [TAG_W-1:0] stored_tag, addr_tag;
  int checks = 0, failures = 0;

  tag_comparator dut (.valid, .stored_tag, .addr_tag, .match);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      valid      = 1'(($urandom % 4) != 0);
      stored_tag = TAG_W'($urandom);
      addr_tag   = (n % 2) ? stored_tag : TAG_W'($urandom);
      if (n % 7 == 0) addr_tag = stored_tag ^ (TAG_W'(1) << ($urandom % TAG_W));
      #1;
      checks++;
      if (match !== (valid && stored_tag == addr_tag)) failures++;
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
