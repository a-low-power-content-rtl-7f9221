// data_sram_tb: data memory at the reference size (512 words x 128 bits).
// Random words are written, then read through one-hot wordlines; the data
// must appear one edge after rd_en and hold while rd_en is low. A read on the
// same edge as a write to that word returns the old word.
module data_sram_tb;
  localparam int unsigned M = 512, N = 128, AW = 9;

  int checks = 0, failures = 0;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [M-1:0] rd_wl = '0;
  logic [N-1:0] rd_data, wr_data = '0;
  logic [AW-1:0] wr_addr = '0;

  logic [N-1:0] model [M];

  data_sram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp;
    int a;
    // fill every word
    for (a = 0; a < M; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      a = $urandom_range(0, M - 1);
      rd_en = ($urandom_range(0, 3) != 0);
      rd_wl = M'(1) << a;
      wr_en = ($urandom_range(0, 3) == 0);
      wr_addr = ($urandom_range(0, 1) == 0) ? AW'(a) : AW'($urandom_range(0, M - 1));
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      exp = rd_en ? model[a] : rd_data;
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== exp) begin
        failures++; $display("FAIL n=%0d word %0d got %h exp %h", n, a, rd_data, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
