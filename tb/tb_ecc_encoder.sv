// tb_ecc_encoder: self-checking test of the SEC-DED line encoder.
//
// The reference code is built here from scratch. It numbers the Hamming
// positions 1..522 (check bits at the powers of two, data bits in order at
// the other positions) and computes each check bit as the parity of the
// covered positions. The overall parity makes the whole codeword even.
// The test covers all-zero data, every single data bit and random lines.
module tb_ecc_encoder;
  import reap_pkg::*;

  logic [DATA_W-1:0] data;
  logic [CW_W-1:0]   cw;
  int checks = 0, failures = 0;

  ecc_encoder dut (.data, .cw);

  // reference: Hamming position of data bit i
  int unsigned pos [DATA_W];
  initial begin
    int unsigned p = 1;
    for (int i = 0; i < DATA_W; i++) begin
      p++;
      while ($countones(p) == 1) p++;
      pos[i] = p;
    end
  end

  function automatic logic [CW_W-1:0] ref_enc(input logic [DATA_W-1:0] d);
    logic [HAM_R-1:0] c;
    for (int j = 0; j < HAM_R; j++) begin
      c[j] = 1'b0;
      for (int i = 0; i < DATA_W; i++)
        if (pos[i][j]) c[j] ^= d[i];
    end
    return {(^d) ^ (^c), c, d};
  endfunction

  task automatic check(input logic [DATA_W-1:0] d);
    data = d;
    #1;
    checks++;
    if (cw !== ref_enc(d)) begin
      failures++;
      if (failures < 5) $display("mismatch: cw=%h exp=%h", cw, ref_enc(d));
    end
    checks++;
    if (^cw !== 1'b0) failures++;  // even parity of codeword
  endtask

  initial begin
    #1;
    check('0);
    for (int i = 0; i < DATA_W; i++) check(DATA_W'(1) << i);
    for (int n = 0; n < 200; n++) begin
      logic [DATA_W-1:0] d;
      for (int k = 0; k < DATA_W / 32; k++) d[k*32 +: 32] = $urandom;
      check(d);
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
