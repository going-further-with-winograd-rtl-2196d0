// tb_mte2: MTE2 transfers against a Broadcast Unit model.
//
// The model accepts a request with random backpressure and returns the burst
// one beat at a time with random gaps; beat i of a burst at address a carries
// a hash of (a/64 + i). Random commands alternate between L0B transfers
// (8..32 beats, i.e. 1..4 L0B rows, independent) and L1 transfers (1..40
// beats, independent or broadcast).
// Checked: the request carries the command's address, length and broadcast
// flag and is never a write; every L1 beat is passed on in order; every L0B
// row is written once at the right address with the eight beats in byte
// order; busy covers the whole transfer and commands are refused meanwhile.
module tb_mte2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int AW = 32, DW = 512, LW = 8, RB = 512, BAB = 7;
  logic cmd_valid, cmd_ready, cmd_bcast, cmd_to_l0b, busy;
  logic [AW-1:0] cmd_gm_addr; logic [LW-1:0] cmd_len; logic [BAB-1:0] cmd_l0b_addr;
  logic bu_req_valid, bu_req_ready, bu_req_bcast, bu_req_we, bu_rsp_valid;
  logic [AW-1:0] bu_req_addr; logic [LW-1:0] bu_req_len; logic [DW-1:0] bu_req_wdata, bu_rsp_data;
  logic l0b_wr_en; logic [BAB-1:0] l0b_wr_addr; logic [RB-1:0][7:0] l0b_wr_data;
  logic l1_wr_valid; logic [DW-1:0] l1_wr_data;

  mte2 dut (.*);

  function automatic logic [DW-1:0] hash(int a);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = 32'(a * 32'h2545f491 + i * 104729);
    return d;
  endfunction

  // Broadcast Unit model
  int pend_beat = -1, pend_left = 0;
  bit exp_bcast;
  logic [AW-1:0] exp_addr; logic [LW-1:0] exp_len;
  always @(negedge clk) begin
    bu_req_ready = ($urandom_range(0, 2) != 0) && pend_left == 0;
    bu_rsp_valid = 0;
    if (pend_left > 0 && $urandom_range(0, 3) != 0) begin
      bu_rsp_valid = 1; bu_rsp_data = hash(pend_beat);
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (bu_req_valid && bu_req_ready) begin
      checks++;
      if (bu_req_addr != exp_addr || bu_req_len != exp_len || bu_req_bcast != exp_bcast || bu_req_we) begin
        failures++; $display("FAIL request fields");
      end
      pend_beat = int'(bu_req_addr >> 6); pend_left = int'(bu_req_len);
    end else if (bu_rsp_valid) begin
      pend_beat++; pend_left--;
    end
  end

  // sinks
  logic [DW-1:0] l1_exp [$];
  int row_exp_addr [$];
  logic [RB-1:0][7:0] row_exp [$];
  always @(posedge clk) if (rst_n) begin
    if (l1_wr_valid) begin
      checks++;
      if (l1_exp.size() == 0 || l1_wr_data != l1_exp[0]) begin failures++; $display("FAIL L1 beat"); end
      if (l1_exp.size() > 0) void'(l1_exp.pop_front());
    end
    if (l0b_wr_en) begin
      checks++;
      if (row_exp.size() == 0 || int'(l0b_wr_addr) != row_exp_addr[0] || l0b_wr_data != row_exp[0]) begin
        failures++; $display("FAIL L0B row %0d", l0b_wr_addr);
      end
      if (row_exp.size() > 0) begin void'(row_exp.pop_front()); void'(row_exp_addr.pop_front()); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_l0b, n_l1, n_bc;
    n_l0b = 0; n_l1 = 0; n_bc = 0;
    cmd_valid = 0; cmd_bcast = 0; cmd_to_l0b = 0; cmd_gm_addr = '0; cmd_len = '0; cmd_l0b_addr = '0;
    bu_req_ready = 0; bu_rsp_valid = 0; bu_rsp_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      bit to_l0b;
      int len, a, ra;
      to_l0b = $urandom_range(0, 1);
      len = to_l0b ? 8 * $urandom_range(1, 4) : $urandom_range(1, 40);
      a = 64 * $urandom_range(0, 100000);
      ra = $urandom_range(0, 100);
      exp_addr = AW'(a); exp_len = LW'(len); exp_bcast = to_l0b ? 0 : $urandom_range(0, 1);
      if (to_l0b) begin
        n_l0b++;
        for (int r = 0; r < len / 8; r++) begin
          logic [RB-1:0][7:0] row;
          for (int q = 0; q < 8; q++) begin
            logic [DW-1:0] d;
            d = hash(a / 64 + r * 8 + q);
            for (int i = 0; i < 64; i++) row[q * 64 + i] = d[i*8 +: 8];
          end
          row_exp.push_back(row); row_exp_addr.push_back(ra + r);
        end
      end else begin
        if (exp_bcast) n_bc++; else n_l1++;
        for (int i = 0; i < len; i++) l1_exp.push_back(hash(a / 64 + i));
      end
      @(negedge clk);
      cmd_valid = 1; cmd_to_l0b = to_l0b; cmd_bcast = exp_bcast; cmd_gm_addr = AW'(a);
      cmd_len = LW'(len); cmd_l0b_addr = BAB'(ra);
      checks++;
      if (!cmd_ready) begin failures++; $display("FAIL not ready when idle"); end
      @(negedge clk) cmd_valid = 0;
      while (busy) begin
        checks++;
        if (cmd_ready) begin failures++; $display("FAIL ready while busy"); end
        @(negedge clk);
      end
      repeat (2) @(negedge clk);
      checks++;
      if (l1_exp.size() != 0 || row_exp.size() != 0 || pend_left != 0) begin
        failures++; $display("FAIL transfer %0d incomplete", n);
        l1_exp.delete(); row_exp.delete(); row_exp_addr.delete();
      end
    end
    checks++;
    if (n_l0b == 0 || n_l1 == 0 || n_bc == 0) begin failures++; $display("FAIL command kinds"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
