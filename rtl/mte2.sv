// mte2: memory transfer engine 2, global memory to L0B or to L1.
//
// Runs one transfer command at a time: it sends a single burst request of
// cmd_len beats (64 B each) to the Broadcast Unit, independent or broadcast,
// and sinks the returning beats. Transfers to L0B gather RB/64 = 8 beats into
// one 512-byte L0B row and write the rows from cmd_l0b_addr upwards; transfers
// to L1 pass every beat on l1_wr_* (L1 itself is outside this RTL).
// The paper names MTE2 and its job (GM to L1 or UB; in the Winograd operator
// also GM to L0B for the weights, with broadcast reads for the iFMs); the
// command format and the single-burst behaviour are this design's choices.
// cmd_len must be a multiple of 8 for L0B transfers.
module mte2 #(
  parameter int AW  = 32,
  parameter int DW  = 512,
  parameter int LW  = 8,
  parameter int RB  = 512,      // L0B row in bytes
  parameter int BAB = 7,        // L0B address width
  localparam int BPR = RB * 8 / DW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic                cmd_bcast,
  input  logic                cmd_to_l0b,
  input  logic [AW-1:0]       cmd_gm_addr,
  input  logic [LW-1:0]       cmd_len,
  input  logic [BAB-1:0]      cmd_l0b_addr,
  output logic                busy,
  // Broadcast Unit request / response
  output logic                bu_req_valid,
  input  logic                bu_req_ready,
  output logic                bu_req_bcast,
  output logic                bu_req_we,
  output logic [AW-1:0]       bu_req_addr,
  output logic [LW-1:0]       bu_req_len,
  output logic [DW-1:0]       bu_req_wdata,
  input  logic                bu_rsp_valid,
  input  logic [DW-1:0]       bu_rsp_data,
  // destinations
  output logic                l0b_wr_en,
  output logic [BAB-1:0]      l0b_wr_addr,
  output logic [RB-1:0][7:0]  l0b_wr_data,
  output logic                l1_wr_valid,
  output logic [DW-1:0]       l1_wr_data
);
  logic          act, req_pend, to_l0b;
  logic [LW-1:0] left;
  logic [$clog2(BPR)-1:0] beat;
  logic [BAB-1:0] row;
  logic [BPR-1:0][DW-1:0] rowbuf;

  assign cmd_ready    = !act;
  assign busy         = act;
  assign bu_req_valid = req_pend;
  assign bu_req_we    = 1'b0;
  assign bu_req_wdata = '0;
  assign l1_wr_valid  = act && !to_l0b && bu_rsp_valid;
  assign l1_wr_data   = bu_rsp_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act <= 1'b0; req_pend <= 1'b0; to_l0b <= 1'b0; left <= '0; beat <= '0;
      row <= '0; l0b_wr_en <= 1'b0; l0b_wr_addr <= '0;
      bu_req_bcast <= 1'b0; bu_req_addr <= '0; bu_req_len <= '0;
    end else begin
      l0b_wr_en <= 1'b0;
      if (cmd_valid && !act) begin
        act          <= (cmd_len != '0);
        req_pend     <= (cmd_len != '0);
        to_l0b       <= cmd_to_l0b;
        left         <= cmd_len;
        beat         <= '0;
        row          <= cmd_l0b_addr;
        bu_req_bcast <= cmd_bcast;
        bu_req_addr  <= cmd_gm_addr;
        bu_req_len   <= cmd_len;
      end else if (act) begin
        if (req_pend && bu_req_ready) req_pend <= 1'b0;
        if (bu_rsp_valid) begin
          left <= left - LW'(1);
          if (left == LW'(1)) act <= 1'b0;
          if (to_l0b) begin
            rowbuf[beat] <= bu_rsp_data;
            beat <= beat + 1'b1;
            if (int'(beat) == BPR - 1) begin
              l0b_wr_en   <= 1'b1;
              l0b_wr_addr <= row;
              row         <= row + 1'b1;
            end
          end
        end
      end
    end
  end

  // rowbuf holds the completed row in the cycle l0b_wr_en is high
  always_comb
    for (int b = 0; b < BPR; b++)
      for (int i = 0; i < DW / 8; i++)
        l0b_wr_data[b * (DW / 8) + i] = rowbuf[b][i*8 +: 8];
endmodule
