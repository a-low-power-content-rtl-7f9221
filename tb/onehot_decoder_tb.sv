// onehot_decoder_tb: exhaustive check of the kappa-to-l local decoder.
// Every KAPPA-bit input value v must produce an output whose only set bit is
// bit v. Runs at the reference size (KAPPA = 3, L = 8) and at KAPPA = 4.
module onehot_decoder_tb;
  int checks = 0, failures = 0;

  logic [2:0]  bin3;
  logic [7:0]  oh3;
  logic [3:0]  bin4;
  logic [15:0] oh4;

  onehot_decoder                         dut3 (.bin(bin3), .onehot(oh3));
  onehot_decoder #(.KAPPA(4), .L(16))    dut4 (.bin(bin4), .onehot(oh4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      bin3 = 3'(v);
      #1;
      checks++;
      if (oh3 !== 8'(1 << v)) begin
        failures++;
        $display("FAIL kappa=3 bin=%0d onehot=%b", v, oh3);
      end
    end
    for (int v = 0; v < 16; v++) begin
      bin4 = 4'(v);
      #1;
      checks++;
      if (oh4 !== 16'(1 << v)) begin
        failures++;
        $display("FAIL kappa=4 bin=%0d onehot=%b", v, oh4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
