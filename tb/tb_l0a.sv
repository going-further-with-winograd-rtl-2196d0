// tb_l0a: self-checking test of L0A. Fills 36-row blocks with diagonal
// writes the way the input transform does (8 tile pairs x 6 columns, lanes
// l = 2i + s), reads every tap row with rotation 2*(t/6) and expects the 16
// tiles in order; then checks normal-mode writes and unrotated reads.
module tb_l0a;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, wr_diag, rd_en;
  logic [6:0] wr_addr, rd_addr;
  logic [3:0] wr_rot, rd_rot;
  logic [15:0][255:0] wr_data, rd_data;

  l0a dut (.*);

  logic [255:0] model [128][16];   // [row][tile]

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_diag = 0; wr_addr = 0; rd_addr = 0; wr_rot = 0; rd_rot = 0; wr_data = '0;
    for (int blk = 0; blk < 3; blk++) begin
      int base = blk * 36;
      for (int p = 0; p < 8; p++)
        for (int j = 0; j < 6; j++) begin
          @(negedge clk);
          wr_en = 1; wr_diag = 1; wr_addr = 7'(base + j); wr_rot = 4'(2 * p);
          for (int l = 0; l < 16; l++) wr_data[l] = {8{$urandom}};
          for (int i = 0; i < 6; i++)
            for (int s = 0; s < 2; s++)
              model[base + 6 * i + j][2 * p + s] = wr_data[2 * i + s];
        end
      @(negedge clk) wr_en = 0;
      for (int t = 0; t < 36; t++) begin
        @(negedge clk);
        rd_en = 1; rd_addr = 7'(base + t); rd_rot = 4'(2 * (t / 6));
        @(negedge clk);
        rd_en = 0;
        for (int m = 0; m < 16; m++) begin
          checks++;
          if (rd_data[m] !== model[base + t][m]) begin
            failures++;
            if (failures < 10) $display("FAIL blk %0d tap %0d tile %0d", blk, t, m);
          end
        end
      end
    end
    // normal mode
    for (int r = 110; r < 128; r++) begin
      @(negedge clk);
      wr_en = 1; wr_diag = 0; wr_addr = 7'(r);
      for (int b = 0; b < 16; b++) begin wr_data[b] = {8{$urandom}}; model[r][b] = wr_data[b]; end
    end
    @(negedge clk) wr_en = 0;
    for (int r = 110; r < 128; r++) begin
      @(negedge clk); rd_en = 1; rd_addr = 7'(r); rd_rot = 0;
      @(negedge clk); rd_en = 0;
      for (int m = 0; m < 16; m++) begin
        checks++;
        if (rd_data[m] !== model[r][m]) begin failures++; $display("FAIL normal row %0d bank %0d", r, m); end
      end
    end
    // a diagonal write must leave rows of block 0 it does not address alone
    begin
      logic [255:0] keep;
      keep = model[1][0];
      @(negedge clk); wr_en = 1; wr_diag = 1; wr_addr = 7'(72); wr_rot = 4'd0; wr_data = '1;
      @(negedge clk); wr_en = 0; rd_en = 1; rd_addr = 7'd1; rd_rot = 0;
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data[0] !== keep) begin failures++; $display("FAIL diagonal write disturbed row 1"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
