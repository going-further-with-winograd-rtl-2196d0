// tb_broadcast_unit: random traffic from two cores through the Broadcast Unit.
//
// Each core model behaves like an MTE2: one request at a time, waiting for
// all read beats before the next. Each core runs its own random list of
// independent reads and single-beat writes, and both cores run the same list
// of broadcast reads at unrelated times. Global memory is a model with random
// request backpressure and random in-order read latency; its content is a
// hash of the beat address unless written.
// Checked: every read beat a core receives is the memory word at the right
// address (writes included), no beat goes to the wrong core, every broadcast
// burst is read from memory once (memory read count = independent beats +
// broadcast beats counted once), a pair of broadcast heads always wins over
// waiting independent requests, and the cores do not deadlock when one waits
// in the broadcast queue while the other still has independent work.
module tb_broadcast_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int AW = 32, DW = 512, LW = 8;
  logic [1:0] req_valid, req_ready, req_bcast, req_we, rsp_valid;
  logic [1:0][AW-1:0] req_addr;
  logic [1:0][LW-1:0] req_len;
  logic [1:0][DW-1:0] req_wdata;
  logic [DW-1:0] rsp_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid, bcast_active;
  logic [AW-1:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_rsp_data;

  broadcast_unit dut (.*);

  function automatic logic [DW-1:0] hash(int a);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = 32'(a * 32'h9e3779b1 + i * 7919);
    return d;
  endfunction

  logic [DW-1:0] gm [int];
  function automatic logic [DW-1:0] rd(int beat);
    return gm.exists(beat) ? gm[beat] : hash(beat);
  endfunction

  typedef struct { logic [DW-1:0] d; int due; } rsp_t;
  rsp_t rq [$];
  int cyc = 0, n_mem_rd = 0, n_mem_wr = 0, n_prio = 0, n_bc_beats = 0, n_nb_beats = 0, n_wait = 0;
  int expect_rd = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_we) begin gm[int'(mem_req_addr >> 6)] = mem_req_wdata; n_mem_wr++; end
        else begin
          rsp_t r;
          r.d = rd(int'(mem_req_addr >> 6));
          r.due = cyc + $urandom_range(1, 8);
          if (rq.size() > 0 && rq[$].due > r.due) r.due = rq[$].due;
          rq.push_back(r);
          n_mem_rd++;
        end
      end
      // priority: two broadcast heads and a waiting independent request
      if (dut.start_bc && !(dut.nb_empty[0] && dut.nb_empty[1])) n_prio++;
      if (!dut.act && !(dut.bc_empty[0] && dut.bc_empty[1]) && !(dut.nb_empty[0] && dut.nb_empty[1])) begin
        checks++;
        if (dut.start_nb && !dut.bc_empty[0] && !dut.bc_empty[1]) begin failures++; $display("FAIL priority"); end
      end
      if (dut.bc_empty[0] != dut.bc_empty[1] && dut.start_nb) n_wait++;
      if (rsp_valid == 2'b11) n_bc_beats++;
      else if (rsp_valid != 0) n_nb_beats++;
    end
  end
  always @(negedge clk) begin
    mem_req_ready = ($urandom_range(0, 3) != 0);
    mem_rsp_valid = 0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      mem_rsp_valid = 1; mem_rsp_data = rq[0].d;
      void'(rq.pop_front());
    end
  end

  // per-core expected response beats
  logic [DW-1:0] exp_q [2][$];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < 2; c++)
      if (rsp_valid[c]) begin
        checks++;
        if (exp_q[c].size() == 0) begin failures++; $display("FAIL core %0d unexpected beat", c); end
        else begin
          if (rsp_data != exp_q[c][0]) begin failures++; $display("FAIL core %0d data", c); end
          void'(exp_q[c].pop_front());
        end
      end

  localparam int NBC = 12, NOPS = 60;
  int bc_addr [NBC], bc_len [NBC];
  logic [DW-1:0] shadow [int];   // writes issued so far (disjoint regions per core)

  task automatic issue(int c, bit bc, bit we, int addr, int len, logic [DW-1:0] wd, bit nowait = 0);
    @(negedge clk);
    req_valid[c] = 1; req_bcast[c] = bc; req_we[c] = we;
    req_addr[c] = AW'(addr); req_len[c] = LW'(len); req_wdata[c] = wd;
    while (!req_ready[c]) @(negedge clk);
    if (!we && !nowait)
      for (int i = 0; i < len; i++) begin
        int b;
        b = addr / 64 + i;
        exp_q[c].push_back(shadow.exists(b) ? shadow[b] : hash(b));
      end
    else shadow[addr / 64] = wd;
    if (!we) expect_rd += bc ? (c == 0 ? len : 0) : len;
    @(negedge clk) req_valid[c] = 0;
    if (nowait) return;
    while (exp_q[c].size() > 0) @(negedge clk);
    // a write is complete once memory has taken it
    if (we) while (!(gm.exists(addr / 64) && gm[addr / 64] == wd)) @(negedge clk);
  endtask

  task automatic core(int c);
    int nb;
    nb = 0;
    repeat ($urandom_range(0, 30)) @(negedge clk);
    for (int n = 0; n < NOPS; n++) begin
      int kind;
      kind = $urandom_range(0, 9);
      if (kind < 2 && nb < NBC) begin
        issue(c, 1, 0, bc_addr[nb], bc_len[nb], '0);
        nb++;
      end else if (kind < 4) begin
        // writes to this core's own region
        int a;
        a = (c + 1) * 32'h10_0000 + 64 * $urandom_range(0, 31);
        issue(c, 0, 1, a, 1, hash(a + 12345 + n));
      end else begin
        // reads: half from the shared region the other core writes too
        int a;
        a = ($urandom_range(0, 1) ? (c + 1) * 32'h10_0000 : 32'h4000) + 64 * $urandom_range(0, 31);
        issue(c, 0, 0, a, $urandom_range(1, 6), '0);
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    while (nb < NBC) begin
      issue(c, 1, 0, bc_addr[nb], bc_len[nb], '0);
      nb++;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_bcast = 0; req_we = 0; req_addr = '0; req_len = '0; req_wdata = '0;
    mem_req_ready = 0; mem_rsp_valid = 0; mem_rsp_data = '0;
    for (int i = 0; i < NBC; i++) begin
      bc_addr[i] = 32'h8000 + 64 * $urandom_range(0, 255);
      bc_len[i] = $urandom_range(1, 40);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork
      core(0);
      core(1);
    join
    // directed: a broadcast pair arrives while an independent request waits;
    // the pair must be served first
    for (int i = 0; i < 8; i++) exp_q[0].push_back(hash(32'h300 + i));
    for (int i = 0; i < 3; i++) begin exp_q[0].push_back(hash(32'h400 + i)); exp_q[1].push_back(hash(32'h400 + i)); end
    for (int i = 0; i < 2; i++) exp_q[1].push_back(hash(32'h500 + i));
    fork
      issue(0, 0, 0, 32'h300 * 64, 8, '0, 1);
      begin @(negedge clk); issue(1, 0, 0, 32'h500 * 64, 2, '0, 1); issue(1, 1, 0, 32'h400 * 64, 3, '0, 1); end
    join
    issue(0, 1, 0, 32'h400 * 64, 3, '0, 1);
    while (exp_q[0].size() > 0 || exp_q[1].size() > 0) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (n_mem_rd != expect_rd) begin failures++; $display("FAIL memory reads %0d expected %0d", n_mem_rd, expect_rd); end
    checks++;
    if (n_prio == 0 || n_wait == 0 || n_bc_beats == 0 || n_nb_beats == 0 || n_mem_wr == 0) begin
      failures++;
      $display("FAIL mechanism missing prio=%0d wait=%0d bc=%0d nb=%0d wr=%0d", n_prio, n_wait, n_bc_beats, n_nb_beats, n_mem_wr);
    end
    $display("prio=%0d wait=%0d bc=%0d nb=%0d wr=%0d", n_prio, n_wait, n_bc_beats, n_nb_beats, n_mem_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
