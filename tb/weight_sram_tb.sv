// weight_sram_tb: random training writes and wordline reads of one cluster's
// weight memory at the reference size (8 rows x 512 columns), checked
// against a bit-array model. Checks: reset clears everything, a column write
// replaces all L bits of that column, a read returns the selected row one
// edge later, rd_en = 0 holds the output, and a read on the same edge as a
// write returns the old row.
module weight_sram_tb;
  localparam int unsigned L = 8;
  localparam int unsigned M = 512;
  localparam int unsigned AW = 9;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic rd_en = 0, wr_en = 0;
  logic [L-1:0] rd_wl = '0, wr_bits = '0;
  logic [AW-1:0] wr_col = '0;
  logic [M-1:0] rd_row;

  bit model [L][M];

  weight_sram dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [M-1:0] model_row(int j);
    logic [M-1:0] r;
    for (int a = 0; a < M; a++) r[a] = model[j][a];
    return r;
  endfunction

  task automatic check_row(logic [M-1:0] exp, string what);
    checks++;
    if (rd_row !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rd_row, exp);
    end
  endtask

  initial begin
    logic [M-1:0] exp, held;
    int j, a;
    foreach (model[jj, aa]) model[jj][aa] = 0;
    #12 rst_n = 1;
    // after reset every row reads zero
    for (j = 0; j < L; j++) begin
      @(negedge clk); rd_en = 1; rd_wl = L'(1) << j;
      @(negedge clk); rd_en = 0;
      check_row('0, "after reset");
    end
    // random operations
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(0, 1) == 1);
      wr_col  = AW'($urandom_range(0, M - 1));
      wr_bits = ($urandom_range(0, 3) == 0) ? L'($urandom) : L'(1) << $urandom_range(0, L - 1);
      rd_en   = ($urandom_range(0, 3) != 0);
      j       = $urandom_range(0, L - 1);
      rd_wl   = L'(1) << j;
      exp     = model_row(j);            // old contents, even if written now
      held    = rd_row;
      if (wr_en) for (int jj = 0; jj < L; jj++) model[jj][wr_col] = wr_bits[jj];
      @(negedge clk);
      if (rd_en) check_row(exp, "read");
      else       check_row(held, "hold");
      wr_en = 0;
    end
    // a write of column a must leave the other columns untouched
    @(negedge clk); rd_en = 0;
    a = 77;
    wr_en = 1; wr_col = AW'(a); wr_bits = 8'b0000_0100;
    for (int jj = 0; jj < L; jj++) model[jj][a] = wr_bits[jj];
    @(negedge clk); wr_en = 0;
    for (j = 0; j < L; j++) begin
      rd_en = 1; rd_wl = L'(1) << j;
      @(negedge clk); rd_en = 0;
      check_row(model_row(j), "after column write");
      checks++;
      if (rd_row[a] !== (j == 2)) begin
        failures++;
        $display("FAIL column %0d row %0d bit %b", a, j, rd_row[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
