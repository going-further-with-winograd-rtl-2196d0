// broadcast_unit: connects the memory transfer engines of the two AI cores to
// global memory (GM) and shares input-feature-map reads between them.
//
// Each core issues read bursts (addr, len beats) or single-beat writes. A
// request is either independent or a broadcast request. Following the paper,
// independent and broadcast requests wait in separate queues (here one pair
// of queues per core), and broadcast requests are served first: when both
// cores have a broadcast request at the head of their broadcast queues, the
// unit acts as a DMA, reads the burst once and delivers every beat to both
// cores. A broadcast request never blocks the independent queues while its
// partner is missing, which is what keeps the cores from deadlocking.
// Independent requests are served round robin between the cores.
// Memory side: one request channel (valid/ready, one beat per request) and an
// in-order response channel of read data; a tag FIFO remembers which core(s)
// each outstanding read beat belongs to. Responses to the cores have no
// backpressure (the transfer engines always sink data).
// Queue depths, the beat width and the one-beat memory requests are this
// design's choices; the paired broadcasts must name the same burst (assert).
module broadcast_unit #(
  parameter int AW = 32,    // byte address width
  parameter int DW = 512,   // beat width (64 B)
  parameter int LW = 8,     // burst length width
  parameter int QD = 4,     // request queue depth
  parameter int TD = 256    // outstanding read beats
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // core side
  input  logic [1:0]           req_valid,
  output logic [1:0]           req_ready,
  input  logic [1:0]           req_bcast,
  input  logic [1:0]           req_we,
  input  logic [1:0][AW-1:0]   req_addr,
  input  logic [1:0][LW-1:0]   req_len,
  input  logic [1:0][DW-1:0]   req_wdata,
  output logic [1:0]           rsp_valid,
  output logic [DW-1:0]        rsp_data,
  // memory side
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [AW-1:0]        mem_req_addr,
  output logic [DW-1:0]        mem_req_wdata,
  input  logic                 mem_rsp_valid,
  input  logic [DW-1:0]        mem_rsp_data,
  // status
  output logic                 bcast_active
);
  typedef struct packed {
    logic          we;
    logic [AW-1:0] addr;
    logic [LW-1:0] len;
    logic [DW-1:0] wdata;
  } req_t;
  localparam int RW = $bits(req_t);

  req_t       nb_dout [2], bc_dout [2];
  logic [1:0] nb_full, nb_empty, nb_pop, bc_full, bc_empty, bc_pop;
  logic [1:0] nb_push, bc_push;
  req_t       req_in  [2];

  for (genvar c = 0; c < 2; c++) begin : g_q
    assign req_in[c]    = '{we: req_we[c], addr: req_addr[c], len: req_len[c], wdata: req_wdata[c]};
    assign nb_push[c]   = req_valid[c] && !req_bcast[c] && !nb_full[c];
    assign bc_push[c]   = req_valid[c] &&  req_bcast[c] && !bc_full[c];
    assign req_ready[c] = req_bcast[c] ? !bc_full[c] : !nb_full[c];
    sync_fifo #(.W(RW), .D(QD)) u_nb (
      .clk, .rst_n, .push(nb_push[c]), .din(req_in[c]), .full(nb_full[c]),
      .pop(nb_pop[c]), .dout(nb_dout[c]), .empty(nb_empty[c]));
    sync_fifo #(.W(RW), .D(QD)) u_bc (
      .clk, .rst_n, .push(bc_push[c]), .din(req_in[c]), .full(bc_full[c]),
      .pop(bc_pop[c]), .dout(bc_dout[c]), .empty(bc_empty[c]));
  end

  // current transfer
  logic          act;
  logic [1:0]    tag;
  logic          cur_we;
  logic [AW-1:0] cur_addr;
  logic [LW-1:0] rem;
  logic [DW-1:0] cur_wdata;
  logic          rr;          // core that wins the next independent tie

  // tag FIFO for outstanding reads
  logic       t_full, t_empty, t_push;
  logic [1:0] t_dout;

  logic start_bc, start_nb;
  logic nb_sel;

  always_comb begin
    start_bc = !act && !bc_empty[0] && !bc_empty[1];
    nb_sel   = (!nb_empty[0] && !nb_empty[1]) ? rr : nb_empty[0];
    start_nb = !act && !start_bc && !(nb_empty[0] && nb_empty[1]);
    bc_pop   = start_bc ? 2'b11 : 2'b00;
    nb_pop   = 2'b00;
    if (start_nb) nb_pop[nb_sel] = 1'b1;
  end

  assign mem_req_valid = act && (cur_we || !t_full);
  assign mem_req_we    = cur_we;
  assign mem_req_addr  = cur_addr;
  assign mem_req_wdata = cur_wdata;
  assign t_push        = mem_req_valid && mem_req_ready && !cur_we;
  assign bcast_active  = act && (tag == 2'b11);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act <= 1'b0;
      tag <= '0;
      rr  <= 1'b0;
      cur_we <= 1'b0; cur_addr <= '0; rem <= '0; cur_wdata <= '0;
    end else begin
      if (start_bc) begin
        act <= 1'b1; tag <= 2'b11;
        cur_we <= 1'b0; cur_addr <= bc_dout[0].addr; rem <= bc_dout[0].len;
        cur_wdata <= '0;
      end else if (start_nb) begin
        act <= 1'b1; tag <= nb_sel ? 2'b10 : 2'b01;
        rr  <= ~nb_sel;
        cur_we <= nb_dout[nb_sel].we; cur_addr <= nb_dout[nb_sel].addr;
        rem <= nb_dout[nb_sel].we ? LW'(1) : nb_dout[nb_sel].len;
        cur_wdata <= nb_dout[nb_sel].wdata;
      end else if (mem_req_valid && mem_req_ready) begin
        cur_addr <= cur_addr + AW'(DW / 8);
        rem      <= rem - LW'(1);
        if (rem == LW'(1)) act <= 1'b0;
      end
    end
  end

  sync_fifo #(.W(2), .D(TD)) u_tag (
    .clk, .rst_n, .push(t_push), .din(tag), .full(t_full),
    .pop(mem_rsp_valid), .dout(t_dout), .empty(t_empty));

  assign rsp_valid = mem_rsp_valid ? t_dout : 2'b00;
  assign rsp_data  = mem_rsp_data;

  always_ff @(posedge clk)
    if (rst_n) begin
      if (start_bc)
        assert (bc_dout[0].addr == bc_dout[1].addr && bc_dout[0].len == bc_dout[1].len && !bc_dout[0].we && !bc_dout[1].we)
          else $error("broadcast_unit: paired broadcast requests differ");
      if (start_bc || start_nb)
        assert ((start_bc ? bc_dout[0].len : nb_dout[nb_sel].len) != '0 || (start_nb && nb_dout[nb_sel].we))
          else $error("broadcast_unit: zero-length read");
      assert (!(mem_rsp_valid && t_empty)) else $error("broadcast_unit: unexpected read response");
    end
endmodule
