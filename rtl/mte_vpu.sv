// mte_vpu: a long-vector unit extended with the Matrix Tile Extension (MTE), top level.
//
// MTE keeps matrix tiles in ordinary vector registers: a VLEN-bit register is read as
// VLEN/RLEN rows of RLEN bits. The tile shape (tm, tn, tk) lives in a 64-bit CSR that software
// sets with tssm/tssn/tssk; the hardware grants the largest shape its register geometry allows.
// Tile loads/stores move tiles between memory and registers, a tile multiply (tmul/tfmul)
// accumulates C += A*B, and tvmask plus the ordinary vector instructions work on the same
// registers, so no data moves between a matrix and a vector register file.
//
// Structure: mte_csr (CSR, tss, vsetvl), mte_seq (instruction sequencer; splits a tile
// multiply into tk cvfma micro-instructions), NLANES x mte_lane (VRF slice, operand buffers,
// FPU/ALU, write-back buffer), mte_lane_xbar (lane interconnect), mte_tvmask and mte_tile_lsu
// (tile memory access). Micro-ops flow through three stages: read (operand buffers), execute
// (interconnect + FU into the write-back buffer), write-back (VRF).
//
// Defaults are the MTE_32v configuration: VLEN 8192, RLEN 512, 32 registers, 64 lanes of 32
// bits (a 2048-bit unit), giving a 16x16x16 fp32 tile multiply in 64 cycles. The paper's system
// has four such vector units working on different instructions, a renamed register file of 40
// physical registers, and an out-of-order scalar core that issues to it; this unit models one
// vector unit executing one instruction at a time on the 32 architectural registers.
//
// Interface: in_valid/in_ready take one decoded instruction (mte_instr_t); tss/csrw/vsetvl
// answer on rsp_valid/rsp_data one cycle later. The memory port moves one RLEN-bit tile row per
// request (see mte_tile_lsu). ev_* pulse once per cvfma bubble, cvfma micro-instruction and
// zero-stride broadcast load.
module mte_vpu
  import mte_pkg::*;
#(
  parameter int unsigned VLEN   = VLEN_D,
  parameter int unsigned RLEN   = RLEN_D,
  parameter int unsigned NLANES = NLANES_D,
  parameter int unsigned NREGS  = NREGS_D
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  mte_instr_t        in_instr,
  output logic              rsp_valid,
  output logic [XLEN-1:0]   rsp_data,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [XLEN-1:0]   mem_req_addr,
  output logic [RLEN-1:0]   mem_req_wdata,
  output logic [RLEN/8-1:0] mem_req_be,
  input  logic              mem_rsp_valid,
  input  logic [RLEN-1:0]   mem_rsp_rdata,
  output logic              ev_stall,
  output logic              ev_cvfma,
  output logic              ev_bcast
);
  localparam int unsigned COLS  = RLEN / ELEN;
  localparam int unsigned NW    = VLEN / ELEN;
  localparam int unsigned SLOTS = NW / NLANES;

  // ---- CSR ----
  logic            csr_cmd_valid;
  logic [XLEN-1:0] csr_rd;
  mte_csr_t        csr;
  logic [15:0]     vl;

  mte_csr #(.VLEN(VLEN), .RLEN(RLEN)) u_csr (
    .clk, .rst_n, .cmd_valid(csr_cmd_valid), .cmd_op(in_instr.op), .cmd_rs1(in_instr.rs1),
    .cmd_ttypeio(in_instr.ttypeio), .rd_o(csr_rd), .csr_o(csr), .vl_o(vl));

  // ---- sequencer ----
  tile_e           mask_tile;
  logic [XLEN-1:0] mask_rs1;
  logic            lsu_start, lsu_store, lsu_trans, lsu_col_agn, lsu_row_agn, lsu_done, lsu_busy;
  logic [11:0]     lsu_rows, lsu_cols;
  logic [XLEN-1:0] lsu_base, lsu_stride;
  lane_rd_t        rd;
  uop_ctrl_t       ctrl_r, ctrl_e;
  logic [ELEN-1:0] scalar;
  logic            img_from_mask;

  mte_seq #(.VLEN(VLEN), .RLEN(RLEN), .NLANES(NLANES)) u_seq (
    .clk, .rst_n,
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_instr_i(in_instr),
    .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data),
    .csr_cmd_valid_o(csr_cmd_valid), .csr_rd_i(csr_rd), .csr_i(csr), .vl_i(vl),
    .mask_tile_o(mask_tile), .mask_rs1_o(mask_rs1),
    .lsu_start_o(lsu_start), .lsu_store_o(lsu_store), .lsu_trans_o(lsu_trans),
    .lsu_rows_o(lsu_rows), .lsu_cols_o(lsu_cols), .lsu_base_o(lsu_base),
    .lsu_stride_o(lsu_stride), .lsu_col_agn_o(lsu_col_agn), .lsu_row_agn_o(lsu_row_agn),
    .lsu_done_i(lsu_done),
    .rd_o(rd), .ctrl_o(ctrl_r), .scalar_o(scalar), .img_from_mask_o(img_from_mask),
    .stall_o(ev_stall), .cvfma_o(ev_cvfma));

  // read stage -> execute stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ctrl_e <= '0;
    else        ctrl_e <= ctrl_r;
  end

  // ---- tvmask ----
  logic [VLEN/8-1:0] mask_bits;
  mte_tvmask #(.VLEN(VLEN), .RLEN(RLEN)) u_tvmask (
    .csr_i(csr), .tile_i(mask_tile), .rs1_i(mask_rs1), .mask_o(mask_bits));

  // ---- tile LSU ----
  logic [NW-1:0][ELEN-1:0]     lsu_img;
  logic [NW-1:0]               lsu_img_en;
  logic [NLANES-1:0][ELEN-1:0] obuf_vd, obuf_vs1, obuf_vs2, obuf_v0;

  mte_tile_lsu #(.VLEN(VLEN), .RLEN(RLEN), .NLANES(NLANES)) u_lsu (
    .clk, .rst_n,
    .start_i(lsu_start), .store_i(lsu_store), .trans_i(lsu_trans),
    .rows_i(lsu_rows), .cols_i(lsu_cols), .base_i(lsu_base), .stride_i(lsu_stride),
    .col_agn_i(lsu_col_agn), .row_agn_i(lsu_row_agn),
    .busy_o(lsu_busy), .done_o(lsu_done), .bcast_o(ev_bcast),
    .image_o(lsu_img), .image_en_o(lsu_img_en),
    .capture_i(ctrl_e.capture), .capture_slot_i(ctrl_e.slot), .capture_data_i(obuf_vd),
    .req_valid_o(mem_req_valid), .req_ready_i(mem_req_ready), .req_we_o(mem_req_we),
    .req_addr_o(mem_req_addr), .req_wdata_o(mem_req_wdata), .req_be_o(mem_req_be),
    .rsp_valid_i(mem_rsp_valid), .rsp_rdata_i(mem_rsp_rdata));

  // register image of the current step, from the LSU or from tvmask (mask words, rest zero)
  logic [NLANES-1:0][ELEN-1:0] img_step;
  logic [NLANES-1:0]           img_en_step;
  logic [NW-1:0][ELEN-1:0]     mask_words;   // mask zero-extended to a full register image
  assign mask_words = (NW*ELEN)'(mask_bits);
  always_comb begin
    for (int unsigned l = 0; l < NLANES; l++) begin
      int unsigned w;
      w = 32'(ctrl_e.slot) * NLANES + l;
      if (img_from_mask) begin
        img_step[l]    = mask_words[w];
        img_en_step[l] = 1'b1;
      end else begin
        img_step[l]    = lsu_img[w];
        img_en_step[l] = lsu_img_en[w];
      end
    end
  end

  // ---- lane interconnect ----
  logic [NLANES-1:0][ELEN-1:0] ex_a, ex_b;
  logic [NLANES-1:0]           ex_en;

  mte_lane_xbar #(.NLANES(NLANES), .COLS(COLS)) u_xbar (
    .ctrl_i(ctrl_e), .vs1_i(obuf_vs1), .vs2_i(obuf_vs2), .v0_i(obuf_v0), .scalar_i(scalar),
    .img_i(img_step), .img_en_i(img_en_step), .a_o(ex_a), .b_o(ex_b), .en_o(ex_en));

  // ---- lanes ----
  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    mte_lane #(.NREGS(NREGS), .SLOTS(SLOTS)) u_lane (
      .clk, .rst_n, .rd_i(rd),
      .obuf_vd_o(obuf_vd[l]), .obuf_vs1_o(obuf_vs1[l]), .obuf_vs2_o(obuf_vs2[l]),
      .obuf_v0_o(obuf_v0[l]),
      .ex_valid_i(ctrl_e.valid), .ex_op_i(ctrl_e.op), .ex_wreg_i(ctrl_e.wreg),
      .ex_wslot_i(ctrl_e.slot), .ex_a_i(ex_a[l]), .ex_b_i(ex_b[l]), .ex_en_i(ex_en[l]));
  end

  // the sequencer never starts the LSU while it is busy
  assert property (@(posedge clk) disable iff (!rst_n) lsu_start |-> !lsu_busy);

endmodule
