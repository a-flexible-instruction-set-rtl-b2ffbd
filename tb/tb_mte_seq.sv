// tb_mte_seq: self-checking test of the instruction sequencer on its own. The testbench plays
// the CSR, the tile LSU and the lanes, records every micro-op the sequencer issues and checks
// the stream against the decomposition worked out here: a tile multiply is tk cvfma
// micro-instructions of ceil(tm*COLS/NLANES) steps; step s of cvfma k reads vd and vs1 at slot
// s and vs2 at slot k*COLS/NLANES; cvfma micro-instructions shorter than 3 steps are padded with
// bubbles; the cycle count from acceptance to the next ready is K*max(steps,3) + 2 (64 + 2 for
// the 16x16x16 tile of the default configuration). Vector operations, tvmask, loads and stores
// are checked for their step counts and LSU handshakes.
module tb_mte_seq;
  import mte_pkg::*;
  localparam int unsigned VLEN = 8192, RLEN = 512, NLANES = 64, COLS = 16, SLOTS = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, rsp_valid, csr_cmd_valid;
  mte_instr_t ins = '0;
  logic [63:0] rsp_data, csr_rd = 64'd77;
  mte_csr_t csr = '0;
  logic [15:0] vl = 0;
  tile_e mask_tile;
  logic [63:0] mask_rs1, lsu_base, lsu_stride;
  logic lsu_start, lsu_store, lsu_trans, lsu_col_agn, lsu_row_agn, lsu_done = 0;
  logic [11:0] lsu_rows, lsu_cols;
  lane_rd_t rd;
  uop_ctrl_t ctrl;
  logic [31:0] scalar;
  logic img_from_mask, stall, cvfma;
  int checks = 0, failures = 0;
  int n_rd, n_stall, n_cvfma, n_img, n_capt, n_lsu_start, bad_uop;
  bit lsu_store_seen, lsu_trans_seen;
  logic [11:0] rows_seen, cols_seen;

  mte_seq #(.VLEN(VLEN), .RLEN(RLEN), .NLANES(NLANES)) dut (.clk, .rst_n,
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_instr_i(ins), .rsp_valid_o(rsp_valid),
    .rsp_data_o(rsp_data), .csr_cmd_valid_o(csr_cmd_valid), .csr_rd_i(csr_rd), .csr_i(csr),
    .vl_i(vl), .mask_tile_o(mask_tile), .mask_rs1_o(mask_rs1), .lsu_start_o(lsu_start),
    .lsu_store_o(lsu_store), .lsu_trans_o(lsu_trans), .lsu_rows_o(lsu_rows),
    .lsu_cols_o(lsu_cols), .lsu_base_o(lsu_base), .lsu_stride_o(lsu_stride),
    .lsu_col_agn_o(lsu_col_agn), .lsu_row_agn_o(lsu_row_agn), .lsu_done_i(lsu_done),
    .rd_o(rd), .ctrl_o(ctrl), .scalar_o(scalar), .img_from_mask_o(img_from_mask),
    .stall_o(stall), .cvfma_o(cvfma));

  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // expected cvfma micro-op stream
  int exp_k, exp_s, steps_cur;
  always @(posedge clk) begin
    if (rd.en) n_rd++;
    if (stall) n_stall++;
    if (cvfma) n_cvfma++;
    if (ctrl.valid && ctrl.mode == XB_IMAGE) n_img++;
    if (ctrl.capture) n_capt++;
    if (lsu_start) begin
      n_lsu_start++; lsu_store_seen = lsu_store; lsu_trans_seen = lsu_trans;
      rows_seen = lsu_rows; cols_seen = lsu_cols;
    end
    if (rd.en && ctrl.mode == XB_CVFMA && ctrl.valid) begin
      if (ctrl.k != 12'(exp_k) || rd.vd_slot != 8'(exp_s) || rd.vs1_slot != 8'(exp_s) ||
          rd.vs2_slot != 8'(exp_k * COLS / NLANES) || ctrl.slot != 8'(exp_s)) bad_uop++;
      if (exp_s + 1 == steps_cur) begin exp_s = 0; exp_k++; end else exp_s++;
    end
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // issue one instruction, return cycles from acceptance until ready again
  task automatic issue(mte_instr_t i, output int cyc);
    n_rd = 0; n_stall = 0; n_cvfma = 0; n_img = 0; n_capt = 0; n_lsu_start = 0; bad_uop = 0;
    exp_k = 0; exp_s = 0;
    @(negedge clk);
    ins = i; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    cyc = 1;
    while (!in_ready) begin
      if (i.op == OP_TL && n_lsu_start > 0 && !lsu_done && $urandom_range(3) == 0) begin
        lsu_done = 1; @(negedge clk); lsu_done = 0; cyc++;
      end else if (i.op == OP_TSC && n_lsu_start > 0) begin
        repeat (5) begin @(negedge clk); cyc++; end
        lsu_done = 1; @(negedge clk); lsu_done = 0; cyc++;
      end else begin @(negedge clk); cyc++; end
    end
  endtask

  initial begin
    mte_instr_t i;
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // tss goes to the CSR, answer next cycle
    i = '0; i.op = OP_TSSM; i.rs1 = 5;
    @(negedge clk); ins = i; in_valid = 1; #1;
    chk("csr cmd", csr_cmd_valid, 1);
    @(negedge clk); in_valid = 0;
    chk("rsp valid", rsp_valid, 1); chk("rsp data", rsp_data, 77);
    // tile multiplies of several shapes
    for (int t = 0; t < 12; t++) begin
      int tm, tk, steps, per;
      tm = (t == 0) ? 16 : $urandom_range(16, 1);
      tk = (t == 0) ? 16 : $urandom_range(16, 1);
      csr.tm = 12'(tm); csr.tk = 12'(tk); csr.tn = 12'($urandom_range(16, 1));
      steps = (tm * COLS + NLANES - 1) / NLANES;
      steps_cur = steps;
      per = steps < 3 ? 3 : steps;
      i = '0; i.op = (t % 2) ? OP_TMUL : OP_TFMUL; i.vd = 3; i.vs1 = 4; i.vs2 = 5;
      issue(i, cyc);
      chk("cvfma reads", n_rd, tk * steps);
      chk("cvfma count", n_cvfma, tk);
      chk("bubbles", n_stall, tk * (per - steps));
      chk("micro-op order", bad_uop, 0);
      chk("tile multiply cycles", cyc, tk * per + 2);
      if (t == 0) chk("16x16x16 takes 64 issue cycles", cyc - 2, 64);
    end
    // vector operation over vl elements
    vl = 100;
    i = '0; i.op = OP_VFMACC_VF; i.vd = 2; i.vs2 = 6; i.rs1 = 64'h4000_0000;
    issue(i, cyc);
    chk("vector steps", n_rd, 2);
    chk("vector scalar", scalar, 32'h4000_0000);
    // tvmask: SLOTS image steps taken from the mask generator
    i = '0; i.op = OP_TVMASK; i.tile = TILE_C; i.vd = 0; i.rs1 = 256;
    issue(i, cyc);
    chk("tvmask steps", n_img, SLOTS);
    chk("tvmask source", img_from_mask, 1);
    // tile loads: LSU started once with the tile's shape, then SLOTS image steps
    csr.tm = 7; csr.tn = 9; csr.tk = 5;
    for (int tt = 0; tt < 4; tt++) begin
      i = '0; i.op = OP_TL; i.tile = tile_e'(tt); i.trans = tt[0]; i.vd = 8; i.rs1 = 1000; i.rs2 = 64;
      issue(i, cyc);
      chk("load LSU starts", n_lsu_start, 1);
      chk("load image steps", n_img, SLOTS);
      chk("load is a load", lsu_store_seen, 0);
      chk("load rows", rows_seen, tt == 0 ? 7 : tt == 1 ? 5 : tt == 2 ? 7 : 9);
      chk("load cols", cols_seen, tt == 0 ? 5 : tt == 1 ? 9 : tt == 2 ? 9 : 5);
    end
    // C store: SLOTS capture reads, then one LSU store of tm x tn
    i = '0; i.op = OP_TSC; i.trans = 1; i.vd = 8; i.rs1 = 2000; i.rs2 = 128;
    issue(i, cyc);
    chk("store captures", n_capt, SLOTS);
    chk("store LSU starts", n_lsu_start, 1);
    chk("store flag", lsu_store_seen, 1);
    chk("store transposed", lsu_trans_seen, 1);
    chk("store shape", {rows_seen, cols_seen}, {12'd7, 12'd9});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
