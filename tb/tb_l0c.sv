// tb_l0c: self-checking test of L0C. Writes random [16 x 16] int32 rows on
// Port A, reads them back on Port A, and gathers rows of the 6x6 tap matrix
// of single tiles on Port B (six rows base+6y+k, tile m), as the output
// transform does, comparing everything with a model.
module tb_l0c;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic a_rd_en, a_wr_en, b_rd_en;
  logic [8:0] a_rd_addr, a_wr_addr;
  logic signed [31:0] a_rd_data [16][16];
  logic signed [31:0] a_wr_data [16][16];
  logic [8:0] b_addr [6];
  logic [3:0] b_tile;
  logic signed [31:0] b_rd_data [6][16];

  l0c dut (.*);

  int model [288][16][16];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_rd_en = 0; a_wr_en = 0; b_rd_en = 0; a_rd_addr = 0; a_wr_addr = 0; b_tile = 0;
    for (int g = 0; g < 6; g++) b_addr[g] = 9'(g);
    for (int r = 0; r < 288; r++) begin
      @(negedge clk);
      a_wr_en = 1; a_wr_addr = 9'(r);
      for (int m = 0; m < 16; m++) for (int n = 0; n < 16; n++) begin
        a_wr_data[m][n] = 32'($urandom);
        model[r][m][n] = a_wr_data[m][n];
      end
    end
    @(negedge clk) a_wr_en = 0;
    for (int n = 0; n < 100; n++) begin
      int r;
      r = $urandom_range(0, 287);
      @(negedge clk); a_rd_en = 1; a_rd_addr = 9'(r);
      @(negedge clk); a_rd_en = 0;
      for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) begin
        checks++;
        if (a_rd_data[m][c] !== model[r][m][c]) begin failures++; if (failures < 10) $display("FAIL A row %0d", r); end
      end
    end
    for (int blk = 0; blk < 8; blk++)
      for (int m = 0; m < 16; m++)
        for (int y = 0; y < 6; y++) begin
          @(negedge clk);
          b_rd_en = 1; b_tile = 4'(m);
          for (int k = 0; k < 6; k++) b_addr[k] = 9'(blk * 36 + 6 * y + k);
          @(negedge clk);
          b_rd_en = 0;
          for (int k = 0; k < 6; k++) for (int c = 0; c < 16; c++) begin
            checks++;
            if (b_rd_data[k][c] !== model[blk * 36 + 6 * y + k][m][c]) begin
              failures++;
              if (failures < 10) $display("FAIL B blk %0d tile %0d row %0d lane %0d", blk, m, y, k);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
