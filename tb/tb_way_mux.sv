// tb_way_mux: fills the k inputs with random lines and checks that each
// one-hot select passes exactly its line, and that an empty select gives 0.
module tb_way_mux;
  localparam int unsigned WAYS = reap_pkg::WAYS;
  localparam int unsigned W    = reap_pkg::DATA_W;
  logic [WAYS-1:0]        sel;
  logic [WAYS-1:0][W-1:0] din;
  logic [W-1:0]           dout;
  int checks = 0, failures = 0;

  way_mux dut (.sel, .din, .dout);

  initial begin
    for (int n = 0; n < 20; n++) begin
      for (int w = 0; w < WAYS; w++)
        for (int k = 0; k < W / 32; k++) din[w][k*32 +: 32] = $urandom;
      for (int w = 0; w < WAYS; w++) begin
        sel = WAYS'(1) << w;
        #1;
        checks++;
        if (dout !== din[w]) failures++;
      end
      sel = '0;
      #1;
      checks++;
      if (dout !== '0) failures++;
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
