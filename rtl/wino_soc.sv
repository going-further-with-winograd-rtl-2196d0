// wino_soc: the accelerator system, two AI cores behind one Broadcast Unit.
//
// Each core (ai_core) has its own MTE2 (mte2), which moves weights from global
// memory into the core's L0B with independent reads and moves input feature
// maps towards L1 with broadcast reads. The Broadcast Unit merges the two
// MTE2 request streams onto the memory port and, when both cores ask for the
// same broadcast burst, reads it once and delivers it to both. This is the
// structure of the paper's system overview (Fig. 2, right): AIC0 and AIC1,
// the BU, and two DDR channels behind it. Parts that this RTL does not contain
// appear as ports: the DDR memory controllers (mem_*), each core's L1 (its
// weight-read port l1_wt_*, the transformed weights wt_out_*, the iFM rows
// ifm_* and the MTE2 data l1_wr_*), the unified buffer (ub_*), and the
// front end that issues the commands (*_start, mte_cmd_*) and programs the
// tap-wise shift tables.
module wino_soc
  import wino_pkg::*;
#(
  parameter int PC = 32,
  parameter int PS = 2,
  parameter int PT = 6,
  parameter int SW = 5,
  parameter int AW = 32,
  parameter int DW = 512,
  parameter int LW = 8,
  localparam int NCORE = 2,
  localparam int CK = 32,
  localparam int CN = 16,
  localparam int AAB = 7,
  localparam int BAB = 7,
  localparam int CAB = 9
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // per-core tap-wise shift tables
  input  logic signed [SW-1:0]  sh_in  [NCORE][N][N],
  input  logic signed [SW-1:0]  sh_wt  [NCORE][NT],
  input  logic signed [SW-1:0]  sh_out [NCORE][N][N],
  // per-core MTE2 commands
  input  logic [NCORE-1:0]      mte_cmd_valid,
  output logic [NCORE-1:0]      mte_cmd_ready,
  input  logic [NCORE-1:0]      mte_cmd_bcast,
  input  logic [NCORE-1:0]      mte_cmd_to_l0b,
  input  logic [AW-1:0]         mte_cmd_gm_addr [NCORE],
  input  logic [LW-1:0]         mte_cmd_len [NCORE],
  input  logic [BAB-1:0]        mte_cmd_l0b_addr [NCORE],
  output logic [NCORE-1:0]      mte_busy,
  output logic [NCORE-1:0]      l1_wr_valid,
  output logic [DW-1:0]         l1_wr_data [NCORE],
  // per-core weight transform
  input  logic [NCORE-1:0]      wt_start,
  input  logic [BAB-1:0]        wt_l0b_base [NCORE],
  input  logic [3:0]            wt_slice [NCORE],
  output logic [NCORE-1:0]      wt_busy,
  output logic [NCORE-1:0]      wt_out_valid,
  output logic [5:0]            wt_out_group [NCORE],
  output logic signed [7:0]     wt_out_taps [NCORE][PC][PT],
  // per-core input transform
  input  logic [NCORE-1:0]      ix_start,
  input  logic [AAB-1:0]        ix_l0a_base [NCORE],
  input  logic [7:0]            ix_count [NCORE],
  output logic [NCORE-1:0]      ix_busy,
  input  logic [NCORE-1:0]      ifm_valid,
  output logic [NCORE-1:0]      ifm_ready,
  input  logic signed [7:0]     ifm_row [NCORE][PS][PC][N],
  // per-core cube
  input  logic [NCORE-1:0]      cube_start,
  input  logic [NCORE-1:0]      cube_wino,
  input  logic [NCORE-1:0]      cube_acc,
  input  logic [7:0]            cube_rep [NCORE],
  input  logic [AAB-1:0]        cube_a_base [NCORE],
  input  logic [BAB-1:0]        cube_b_base [NCORE],
  input  logic [CAB-1:0]        cube_c_base [NCORE],
  output logic [NCORE-1:0]      cube_busy,
  output logic [NCORE-1:0]      l1_wt_req,
  output logic [5:0]            l1_wt_tap [NCORE],
  input  logic signed [7:0]     l1_wt_data [NCORE][CK][CN],
  // per-core output transform
  input  logic [NCORE-1:0]      ox_start,
  input  logic [CAB-1:0]        ox_c_base [NCORE],
  input  logic [4:0]            ox_ntiles [NCORE],
  output logic [NCORE-1:0]      ox_busy,
  output logic [NCORE-1:0]      ub_valid,
  output logic signed [31:0]    ub_data [NCORE][CN][M][M],
  // global memory (DDR controllers)
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_we,
  output logic [AW-1:0]         mem_req_addr,
  output logic [DW-1:0]         mem_req_wdata,
  input  logic                  mem_rsp_valid,
  input  logic [DW-1:0]         mem_rsp_data,
  output logic                  bcast_active
);
  logic [NCORE-1:0]         bu_req_valid, bu_req_ready, bu_req_bcast, bu_req_we, bu_rsp_valid;
  logic [NCORE-1:0][AW-1:0] bu_req_addr;
  logic [NCORE-1:0][LW-1:0] bu_req_len;
  logic [NCORE-1:0][DW-1:0] bu_req_wdata;
  logic [DW-1:0]            bu_rsp_data;

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    logic                  l0b_wr_en;
    logic [BAB-1:0]        l0b_wr_addr;
    logic [CK*CN-1:0][7:0] l0b_wr_data;

    mte2 #(.AW(AW), .DW(DW), .LW(LW), .RB(CK*CN), .BAB(BAB)) u_mte2 (
      .clk, .rst_n,
      .cmd_valid(mte_cmd_valid[c]), .cmd_ready(mte_cmd_ready[c]),
      .cmd_bcast(mte_cmd_bcast[c]), .cmd_to_l0b(mte_cmd_to_l0b[c]),
      .cmd_gm_addr(mte_cmd_gm_addr[c]), .cmd_len(mte_cmd_len[c]),
      .cmd_l0b_addr(mte_cmd_l0b_addr[c]), .busy(mte_busy[c]),
      .bu_req_valid(bu_req_valid[c]), .bu_req_ready(bu_req_ready[c]),
      .bu_req_bcast(bu_req_bcast[c]), .bu_req_we(bu_req_we[c]),
      .bu_req_addr(bu_req_addr[c]), .bu_req_len(bu_req_len[c]),
      .bu_req_wdata(bu_req_wdata[c]),
      .bu_rsp_valid(bu_rsp_valid[c]), .bu_rsp_data(bu_rsp_data),
      .l0b_wr_en, .l0b_wr_addr, .l0b_wr_data,
      .l1_wr_valid(l1_wr_valid[c]), .l1_wr_data(l1_wr_data[c]));

    ai_core #(.PC(PC), .PS(PS), .PT(PT), .SW(SW)) u_core (
      .clk, .rst_n,
      .sh_in(sh_in[c]), .sh_wt(sh_wt[c]), .sh_out(sh_out[c]),
      .l0b_wr_en, .l0b_wr_addr, .l0b_wr_data,
      .wt_start(wt_start[c]), .wt_l0b_base(wt_l0b_base[c]), .wt_slice(wt_slice[c]),
      .wt_busy(wt_busy[c]), .wt_out_valid(wt_out_valid[c]),
      .wt_out_group(wt_out_group[c]), .wt_out_taps(wt_out_taps[c]),
      .ix_start(ix_start[c]), .ix_l0a_base(ix_l0a_base[c]), .ix_count(ix_count[c]),
      .ix_busy(ix_busy[c]), .ifm_valid(ifm_valid[c]), .ifm_ready(ifm_ready[c]),
      .ifm_row(ifm_row[c]),
      .cube_start(cube_start[c]), .cube_wino(cube_wino[c]), .cube_acc(cube_acc[c]),
      .cube_rep(cube_rep[c]), .cube_a_base(cube_a_base[c]), .cube_b_base(cube_b_base[c]),
      .cube_c_base(cube_c_base[c]), .cube_busy(cube_busy[c]),
      .l1_wt_req(l1_wt_req[c]), .l1_wt_tap(l1_wt_tap[c]), .l1_wt_data(l1_wt_data[c]),
      .ox_start(ox_start[c]), .ox_c_base(ox_c_base[c]), .ox_ntiles(ox_ntiles[c]),
      .ox_busy(ox_busy[c]), .ub_valid(ub_valid[c]), .ub_data(ub_data[c]));
  end

  broadcast_unit #(.AW(AW), .DW(DW), .LW(LW)) u_bu (
    .clk, .rst_n,
    .req_valid(bu_req_valid), .req_ready(bu_req_ready), .req_bcast(bu_req_bcast),
    .req_we(bu_req_we), .req_addr(bu_req_addr), .req_len(bu_req_len),
    .req_wdata(bu_req_wdata), .rsp_valid(bu_rsp_valid), .rsp_data(bu_rsp_data),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data, .bcast_active);
endmodule
