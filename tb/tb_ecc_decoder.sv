// tb_ecc_decoder: self-checking test of the SEC-DED line decoder.
//
// Codewords are made by an encoder written here (parity over Hamming
// positions), independent of the RTL. Each random line is checked:
// unchanged (no flag, same data), with every kind of single flipped bit
// (data, check and overall parity bit: ce, data and codeword repaired), and
// with two flipped bits (ue). It also checks the one-way 1->0 flips that
// read disturbance causes.
module tb_ecc_decoder;
  import reap_pkg::*;

  logic [CW_W-1:0]   cw_in, cw_corr;
  logic [DATA_W-1:0] data;
  logic              ce, ue;
  int checks = 0, failures = 0;

  ecc_decoder dut (.cw_in, .data, .cw_corr, .ce, .ue);

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

  task automatic expect_(input logic [CW_W-1:0] in, input logic [CW_W-1:0] good,
                         input logic exp_ce, input logic exp_ue, input string what);
    cw_in = in;
    #1;
    checks++;
    if (ce !== exp_ce || ue !== exp_ue) begin
      failures++;
      if (failures < 8) $display("%s: ce=%b ue=%b exp %b %b", what, ce, ue, exp_ce, exp_ue);
    end
    if (!exp_ue) begin
      checks++;
      if (data !== good[DATA_W-1:0] || cw_corr !== good) begin
        failures++;
        if (failures < 8) $display("%s: data not repaired", what);
      end
    end
  endtask

  initial begin
    #1;
    for (int n = 0; n < 40; n++) begin
      logic [DATA_W-1:0] d;
      logic [CW_W-1:0]   g, e;
      int unsigned       b1, b2;
      for (int k = 0; k < DATA_W / 32; k++) d[k*32 +: 32] = $urandom;
      g = ref_enc(d);
      expect_(g, g, 1'b0, 1'b0, "clean");
      // single errors: a data bit, a check bit, the overall parity bit
      b1 = $urandom % DATA_W;
      e = g; e[b1] = ~e[b1];
      expect_(e, g, 1'b1, 1'b0, "data bit");
      b1 = DATA_W + ($urandom % HAM_R);
      e = g; e[b1] = ~e[b1];
      expect_(e, g, 1'b1, 1'b0, "check bit");
      e = g; e[CW_W-1] = ~e[CW_W-1];
      expect_(e, g, 1'b1, 1'b0, "parity bit");
      // read disturbance: a stored 1 becomes 0
      do b1 = $urandom % CW_W; while (g[b1] == 1'b0);
      e = g; e[b1] = 1'b0;
      expect_(e, g, 1'b1, 1'b0, "1->0 flip");
      // double error
      b1 = $urandom % CW_W;
      do b2 = $urandom % CW_W; while (b2 == b1);
      e = g; e[b1] = ~e[b1]; e[b2] = ~e[b2];
      expect_(e, g, 1'b0, 1'b1, "double");
    end
    // every single-bit position of one line
    begin
      logic [CW_W-1:0] g, e;
      g = ref_enc({16{32'hA5C3_0F17}});
      for (int b = 0; b < CW_W; b++) begin
        e = g; e[b] = ~e[b];
        expect_(e, g, 1'b1, 1'b0, "sweep");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
