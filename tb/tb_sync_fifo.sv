// tb_sync_fifo: random push/pop traffic on sync_fifo (W=8, D=5, a depth that
// is not a power of two) against a queue model. Pushes only when not full
// and pops only when not empty; checks dout, full and empty every cycle.
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [7:0] din, dout;
  logic [7:0] q [$];
  int n_full = 0;

  sync_fifo #(.W(8), .D(5)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == 5) || empty != (q.size() == 0) || (q.size() > 0 && dout != q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d size %0d full %b empty %b", n, q.size(), full, empty);
      end
      if (full) n_full++;
      push = !full && ($urandom_range(0, 99) < ((n / 2000) % 2 ? 70 : 30));
      pop  = !empty && ($urandom_range(0, 99) < ((n / 2000) % 2 ? 30 : 70));
      din  = 8'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
