// global_decoder_tb: random weight rows into the global decoder at the
// reference size (C = 3, M = 512, ZETA = 8), checked bit by bit against
// Eq. (1) evaluated in the testbench: neuron i' is 1 when bit i' of every
// row is 1, and enable k is 1 when any neuron of entries k*8 .. k*8+7 is 1.
module global_decoder_tb;
  localparam int unsigned C = 3, M = 512, ZETA = 8, BETA = 64;

  int checks = 0, failures = 0;
  logic [C-1:0][M-1:0] rows;
  logic [M-1:0] neuron;
  logic [BETA-1:0] en;
  int n_en_total = 0;

  global_decoder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_n [M];
    bit exp_e;
    for (int t = 0; t < 300; t++) begin
      // density varies so that both sparse and dense patterns occur
      int dens = $urandom_range(1, 9);
      for (int i = 0; i < C; i++)
        for (int a = 0; a < M; a++)
          rows[i][a] = ($urandom_range(0, 9) < dens);
      #1;
      for (int a = 0; a < M; a++) begin
        exp_n[a] = 1;
        for (int i = 0; i < C; i++) if (!rows[i][a]) exp_n[a] = 0;
        checks++;
        if (neuron[a] !== exp_n[a]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d neuron %0d", t, a);
        end
      end
      for (int k = 0; k < BETA; k++) begin
        exp_e = 0;
        for (int r = 0; r < ZETA; r++) if (exp_n[k*ZETA + r]) exp_e = 1;
        checks++;
        if (en[k] !== exp_e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d en %0d", t, k);
        end
        n_en_total += int'(exp_e);
      end
    end
    // all-zero and all-one corner cases
    rows = '0; #1; checks++; if (neuron !== '0 || en !== '0) failures++;
    rows = '1; #1; checks++; if (neuron !== '1 || en !== '1) failures++;
    $display("enables seen: %0d", n_en_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
