// tb_l0b: self-checking test of L0B: random full-row writes, full-row reads
// and 32-byte slice reads, each compared with a model one cycle after the read.
module tb_l0b;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [6:0] wr_addr, rd_addr;
  logic [3:0] rd_slice;
  logic [511:0][7:0] wr_data, rd_data;
  logic [31:0][7:0] rd_slice_data;

  l0b dut (.*);

  logic [511:0][7:0] model [128];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; rd_slice = 0; wr_data = '0;
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 7'(r);
      for (int i = 0; i < 512; i++) wr_data[i] = 8'($urandom);
      model[r] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      int r, s;
      r = $urandom_range(0, 127); s = $urandom_range(0, 15);
      @(negedge clk); rd_en = 1; rd_addr = 7'(r); rd_slice = 4'(s);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== model[r]) begin failures++; $display("FAIL row %0d", r); end
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (rd_slice_data[i] !== model[r][s * 32 + i]) begin failures++; $display("FAIL slice %0d byte %0d", s, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
