// Shared body of the end-to-end testbenches of mte_vpu (tb_mte_vpu at a reduced size,
// tb_mte_vpu_full at the default size). The including module defines VLEN, RLEN, NLANES and
// the GEMM sizes GM, GN, GK. Matrices hold small integers stored as fp32 (or int32), so every
// sum is exact and the reference is computed with integer arithmetic.
//
// Part 1 runs the MTE SGEMM kernel C <- alpha*A*B + beta*C tile by tile: tss for the shape,
// vsetvl + tvmaskc for the C mask, broadcast of zero into the accumulator, tla/tlb/tfmul over K,
// tlc, masked vfmul.vf / vfmacc.vf for alpha and beta, tsc. Part 2 runs an integer GEMM with A
// read column-major (transposed tile load) and C written column-major (transposed store).
// Part 3 covers a zero-stride row broadcast, a tile multiply masked by software, the agnostic
// policy, mixed-precision shape requests and the cycle count of one tile multiply.
// Every mechanism is counted and must have happened at least once.

  import mte_pkg::*;
  localparam int unsigned COLS = RLEN / 32, MROWS = VLEN / RLEN;
  localparam int unsigned NMAX = COLS, KMAX = (MROWS < COLS) ? MROWS : COLS;
  localparam int unsigned A_BASE = 0, B_BASE = 16384, C_BASE = 32768, D_BASE = 49152;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, rsp_valid;
  mte_instr_t ins = '0;
  logic [63:0] rsp_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [63:0] mem_req_addr;
  logic [RLEN-1:0] mem_req_wdata, mem_rsp_rdata;
  logic [RLEN/8-1:0] mem_req_be;
  logic ev_stall, ev_cvfma, ev_bcast;
  int checks = 0, failures = 0;
  int n_stall = 0, n_cvfma = 0, n_bcast = 0, n_clamp = 0, n_ttl = 0, n_tts = 0;
  int n_vecmode = 0, n_masked_mul = 0, n_agnostic = 0, n_mixed = 0;

  `MTE_VPU_INST

  tb_mem_model #(.RLEN(RLEN), .MEM_BYTES(65536), .LAT(3), .STALLS(1'b1)) mem (.clk,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_be(mem_req_be),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_stall) n_stall++;
    if (ev_cvfma) n_cvfma++;
    if (ev_bcast) n_bcast++;
  end

  function automatic logic [31:0] i2f(int v);   // exact for |v| < 2^24
    logic [31:0] m; int e; logic s;
    if (v == 0) return 0;
    s = v < 0; m = s ? -v : v; e = 0;
    for (int i = 0; i < 32; i++) if (m[i]) e = i;
    return {s, 8'(127 + e), 23'(m << (23 - e))};
  endfunction
  // half-integers: value v/2
  function automatic logic [31:0] h2f(int v);
    logic [31:0] f;
    f = i2f(v);
    if (v != 0) f[30:23] = f[30:23] - 1;
    return f;
  endfunction

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask

  // issue one instruction; returns the CSR answer (if any) and the cycles until ready again
  task automatic exec(mte_instr_t i, output logic [63:0] res, output int cyc);
    @(negedge clk);
    ins = i; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    res = rsp_data;
    cyc = 1;
    while (!in_ready) begin @(negedge clk); cyc++; end
  endtask

  function automatic mte_instr_t mk(mte_op_e op, int vd = 0, int vs1 = 0, int vs2 = 0,
                                    longint rs1 = 0, longint rs2 = 0);
    mte_instr_t i;
    i = '0; i.op = op; i.vd = 5'(vd); i.vs1 = 5'(vs1); i.vs2 = 5'(vs2);
    i.rs1 = 64'(rs1); i.rs2 = 64'(rs2); i.ttypeio = 3'b010;  // SEW 32, uniform
    return i;
  endfunction

  task automatic tss(mte_op_e op, int req, output int granted);
    logic [63:0] r; int c;
    exec(mk(op, 0, 0, 0, req), r, c);
    granted = int'(r);
    if (granted < req) n_clamp++;
  endtask

  task automatic op0(mte_instr_t i);
    logic [63:0] r; int c;
    exec(i, r, c);
  endtask

  function automatic mte_instr_t tl(tile_e t, bit trans, int vd, longint base, longint stride);
    mte_instr_t i;
    i = mk(OP_TL, vd, 0, 0, base, stride); i.tile = t; i.trans = trans;
    return i;
  endfunction

  initial begin
    int a_m [GM][GK], b_m [GK][GN], c_m [GM][GN];
    int lda, ldb, ldc, sm, sn, sk, gvl, cyc;
    logic [63:0] r;
    mte_instr_t i;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lda = GK + 3; ldb = GN + 1; ldc = GN + 2;
    for (int x = 0; x < GM; x++) for (int y = 0; y < GK; y++) begin
      a_m[x][y] = $urandom_range(14) - 7; mem.write32(A_BASE + 4 * (x * lda + y), i2f(a_m[x][y]));
    end
    for (int x = 0; x < GK; x++) for (int y = 0; y < GN; y++) begin
      b_m[x][y] = $urandom_range(14) - 7; mem.write32(B_BASE + 4 * (x * ldb + y), i2f(b_m[x][y]));
    end
    for (int x = 0; x < GM; x++) for (int y = 0; y < GN; y++) begin
      c_m[x][y] = $urandom_range(40) - 20; mem.write32(C_BASE + 4 * (x * ldc + y), i2f(c_m[x][y]));
    end
    for (int x = 0; x < GM; x++) mem.write32(C_BASE + 4 * (x * ldc + GN), 32'h0bad_cafe);

    // ---------------- Part 1: SGEMM, alpha = 2.0, beta = 0.5 ----------------
    for (int m = 0; m < GM; m += sm) begin
      tss(OP_TSSM, GM - m, sm);
      for (int n = 0; n < GN; n += sn) begin
        tss(OP_TSSN, GN - n, sn);
        exec(mk(OP_VSETVL, 0, 0, 0, sm * COLS), r, cyc); gvl = int'(r);
        i = mk(OP_TVMASK, 0, 0, 0, gvl); i.tile = TILE_C; op0(i);   // v0 = C mask
        op0(mk(OP_VBCAST, 1, 0, 0, 0));                             // v1 = 0.0
        n_vecmode++;
        for (int k = 0; k < GK; k += sk) begin
          tss(OP_TSSK, GK - k, sk);
          op0(tl(TILE_A, 0, 2, A_BASE + 4 * (m * lda + k), 4 * lda));
          op0(tl(TILE_B, 0, 3, B_BASE + 4 * (k * ldb + n), 4 * ldb));
          exec(mk(OP_TFMUL, 1, 2, 3), r, cyc);
          chk("tfmul cycles", cyc, sk * (((sm * COLS + NLANES - 1) / NLANES) < 3 ? 3 :
                                          ((sm * COLS + NLANES - 1) / NLANES)) + 2);
          // the default configuration's full 16x16x16 tile: 64 cycles of cvfma issue
          if (VLEN == 8192 && RLEN == 512 && NLANES == 64 && sm == 16 && sk == 16)
            chk("16x16x16 tfmul in 64 cycles", cyc - 2, 64);
        end
        op0(tl(TILE_C, 0, 4, C_BASE + 4 * (m * ldc + n), 4 * ldc));
        i = mk(OP_VFMUL_VF, 1, 0, 1, 64'h4000_0000); i.vm = 1; op0(i);   // c *= 2.0
        i = mk(OP_VFMACC_VF, 1, 0, 4, 64'h3f00_0000); i.vm = 1; op0(i);  // c += 0.5 * t
        n_vecmode++;
        op0(mk(OP_TSC, 1, 0, 0, C_BASE + 4 * (m * ldc + n), 4 * ldc));
      end
    end
    for (int x = 0; x < GM; x++) for (int y = 0; y < GN; y++) begin
      int acc;
      acc = 0;
      for (int z = 0; z < GK; z++) acc += a_m[x][z] * b_m[z][y];
      chk($sformatf("sgemm C[%0d][%0d]", x, y), mem.read32(C_BASE + 4 * (x * ldc + y)),
          h2f(4 * acc + c_m[x][y]));   // (2*acc + 0.5*c) = (4*acc + c)/2
    end
    // the padding between the rows of C (leading dimension GN + 2) is untouched
    for (int x = 0; x < GM; x++) chk("C padding untouched", mem.read32(C_BASE + 4 * (x * ldc + GN)), 32'h0bad_cafe);

    // ---------------- Part 2: integer GEMM, A column-major, C column-major ----------------
    // A^T in memory at D_BASE (element (x,z) at (z*GM + x)); result C^T at D_BASE + 8192
    for (int x = 0; x < GM; x++) for (int z = 0; z < GK; z++) mem.write32(D_BASE + 4 * (z * GM + x), 32'(a_m[x][z]));
    for (int z = 0; z < GK; z++) for (int y = 0; y < GN; y++) mem.write32(B_BASE + 4 * (z * ldb + y), 32'(b_m[z][y]));
    for (int m = 0; m < GM; m += sm) begin
      tss(OP_TSSM, GM - m, sm);
      for (int n = 0; n < GN; n += sn) begin
        tss(OP_TSSN, GN - n, sn);
        exec(mk(OP_VSETVL, 0, 0, 0, sm * COLS), r, cyc);
        op0(mk(OP_VBCAST, 7, 0, 0, 0));
        for (int k = 0; k < GK; k += sk) begin
          tss(OP_TSSK, GK - k, sk);
          op0(tl(TILE_A, 1, 8, D_BASE + 4 * (k * GM + m), 4 * GM)); n_ttl++;
          op0(tl(TILE_B, 0, 9, B_BASE + 4 * (k * ldb + n), 4 * ldb));
          op0(mk(OP_TMUL, 7, 8, 9));
        end
        i = mk(OP_TSC, 7, 0, 0, D_BASE + 8192 + 4 * (n * GM + m), 4 * GM); i.trans = 1; op0(i); n_tts++;
      end
    end
    for (int x = 0; x < GM; x++) for (int y = 0; y < GN; y++) begin
      int acc;
      acc = 0;
      for (int z = 0; z < GK; z++) acc += a_m[x][z] * b_m[z][y];
      chk($sformatf("igemm C^T[%0d][%0d]", y, x), mem.read32(D_BASE + 8192 + 4 * (y * GM + x)), {32'(acc)});
    end

    // ---------------- Part 3: broadcast, software mask, agnostic policy, shapes ----------------
    begin
      int tm, tn, tk, rowv [COLS];
      tss(OP_TSSM, 100000, tm);   chk("tssm max", tm, MROWS);
      tss(OP_TSSN, 100000, tn);   chk("tssn max", tn, NMAX);
      tss(OP_TSSK, 100000, tk);   chk("tssk max", tk, KMAX);
      // mixed precision request (SEW_i 16 -> SEW_o 32): K doubles, N limited by rows
      i = mk(OP_TSSK, 0, 0, 0, 100000); i.ttypeio = 3'b101; exec(i, r, cyc);
      chk("mixed tssk", r, RLEN / 16); n_mixed++;
      i = mk(OP_TSSN, 0, 0, 0, 100000); i.ttypeio = 3'b101; exec(i, r, cyc);
      chk("mixed tssn", r, (RLEN / 32 < MROWS) ? RLEN / 32 : MROWS);
      tss(OP_TSSM, MROWS, tm); tss(OP_TSSN, NMAX, tn); tss(OP_TSSK, KMAX, tk);
      // B = one row broadcast to all K rows (stride 0); A = all ones; C = A*B: every row of C
      // is tk * row
      for (int y = 0; y < COLS; y++) begin rowv[y] = $urandom_range(100); mem.write32(D_BASE + 4 * y, 32'(rowv[y])); end
      exec(mk(OP_VSETVL, 0, 0, 0, VLEN / 32), r, cyc);
      op0(mk(OP_VBCAST, 10, 0, 0, 1));     // A = ones
      op0(mk(OP_VBCAST, 11, 0, 0, 0));     // C = 0
      op0(tl(TILE_B, 0, 12, D_BASE, 0));
      // software mask: v0 = tvmask for a C tile with only the first half of the rows
      i = mk(OP_TVMASK, 0, 0, 0, (MROWS / 2) * COLS); i.tile = TILE_C; op0(i);
      i = mk(OP_TMUL, 11, 10, 12); i.vm = 1; op0(i); n_masked_mul++;
      op0(mk(OP_TSC, 11, 0, 0, D_BASE + 4096, 4 * COLS));
      for (int x = 0; x < MROWS; x++) for (int y = 0; y < COLS; y++)
        chk("broadcast/masked tmul", mem.read32(D_BASE + 4096 + 4 * (x * COLS + y)),
            (x < MROWS / 2) ? {32'(tk * rowv[y])} : 32'd0);
      // agnostic column policy: a load of a narrow tile zeroes the inactive columns
      exec(mk(OP_CSRW, 0, 0, 0, {8'd0, 12'd0, 4'b0110, 4'b0110, 12'(KMAX), 12'd2, 12'(MROWS)}), r, cyc);
      op0(mk(OP_VBCAST, 13, 0, 0, 32'h5555));
      op0(tl(TILE_C, 0, 13, D_BASE, 4 * COLS)); n_agnostic++;
      op0(mk(OP_TSC, 13, 0, 0, D_BASE + 8192 - 4096, 4 * COLS));  // store with tn = 2
      exec(mk(OP_CSRW, 0, 0, 0, {8'd0, 12'd0, 4'b0010, 4'b0010, 12'(KMAX), 12'(NMAX), 12'(MROWS)}), r, cyc);
      op0(mk(OP_TSC, 13, 0, 0, D_BASE + 8192 - 2048, 4 * COLS));  // full store shows zeros
      for (int y = 0; y < COLS; y++)
        chk("agnostic zero columns", mem.read32(D_BASE + 8192 - 2048 + 4 * y), y < 2 ? {32'(rowv[y])} : 32'd0);
    end

    // ---------------- mechanism coverage ----------------
    chk("cvfma bubbles happened", n_stall > 0, 1);
    chk("cvfma issued", n_cvfma > 0, 1);
    chk("zero-stride broadcast happened", n_bcast > 0, 1);
    chk("tss clamp happened", n_clamp > 0, 1);
    chk("transposed load happened", n_ttl > 0, 1);
    chk("transposed store happened", n_tts > 0, 1);
    chk("matrix->vector mode switch happened", n_vecmode > 0, 1);
    chk("masked tile multiply happened", n_masked_mul > 0, 1);
    chk("agnostic policy happened", n_agnostic > 0, 1);
    chk("mixed precision shape happened", n_mixed > 0, 1);
    $display("mechanisms: bubbles=%0d cvfma=%0d broadcasts=%0d clamps=%0d ttl=%0d tts=%0d vecmode=%0d masked=%0d agnostic=%0d mixed=%0d",
             n_stall, n_cvfma, n_bcast, n_clamp, n_ttl, n_tts, n_vecmode, n_masked_mul, n_agnostic, n_mixed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
