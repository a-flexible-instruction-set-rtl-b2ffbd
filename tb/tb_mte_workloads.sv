// tb_mte_workloads: GEMM shapes of the two workload families this unit targets, run on
// mte_vpu at its default size (VLEN 8192, RLEN 512, 64 lanes: 16x16x16 fp32 tiles).
//
//  * a transformer attention-score GEMM: 32 queries against 32 keys with a head dimension of
//    64 (d_model 512 split over 8 heads): M = 32, N = 32, K = 64;
//  * a pointwise convolution layer with minibatch 16 as the GEMM rows, 48 output and 40 input
//    feature maps: M = 16, N = 48, K = 40 (K is not a multiple of 16, so the last tile
//    multiply runs with tk = 8).
//
// Both use the same tile loop: tss for each dimension, tlc of C, tla/tlb/tfmul over K, tsc
// (C <- C + A*B). Matrices hold small integers stored as fp32, so every sum is exact and
// the reference is integer arithmetic. The testbench also counts the cycles spent in tile
// multiplies against the whole run and checks that every full 16x16x16 tile multiply takes
// 64 issue cycles (plus 2 cycles of pipeline drain). The full-size layers of those networks
// run the same loop more times; they are not simulated here.
// The query count, head dimension and minibatch are the paper's workload sizes; the feature-
// map counts of the convolution are this testbench's own small choice.
module tb_mte_workloads;
  import mte_pkg::*;
  localparam int unsigned RLEN = 512, COLS = 16;
  localparam int unsigned A_BASE = 0, B_BASE = 32768, C_BASE = 65536;

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

  mte_vpu dut (.clk, .rst_n, .in_valid, .in_ready, .in_instr(ins), .rsp_valid, .rsp_data,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata, .mem_req_be,
    .mem_rsp_valid, .mem_rsp_rdata, .ev_stall, .ev_cvfma, .ev_bcast);

  tb_mem_model #(.RLEN(RLEN), .MEM_BYTES(131072), .LAT(4), .STALLS(1'b1)) mem (.clk,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_be(mem_req_be),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;
  initial begin repeat (1000000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [31:0] i2f(int v);   // exact for |v| < 2^24
    logic [31:0] m; int e; logic s;
    if (v == 0) return 0;
    s = v < 0; m = s ? -v : v; e = 0;
    for (int i = 0; i < 32; i++) if (m[i]) e = i;
    return {s, 8'(127 + e), 23'(m << (23 - e))};
  endfunction

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask

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
                                    longint rs1 = 0, longint rs2 = 0, tile_e t = TILE_A);
    mte_instr_t i;
    i = '0; i.op = op; i.vd = 5'(vd); i.vs1 = 5'(vs1); i.vs2 = 5'(vs2); i.tile = t;
    i.rs1 = 64'(rs1); i.rs2 = 64'(rs2); i.ttypeio = 3'b010;  // SEW 32, uniform
    return i;
  endfunction

  // C (GM x GN, row-major) += A (GM x GK) * B (GK x GN); prints total and tfmul cycles
  task automatic gemm(string name, longint GM, longint GN, longint GK);
    int a_m [], b_m [], c_m [];
    longint sm, sn, sk, m, n, k;
    int cyc, total, mul;
    logic [63:0] r;
    longint t0;
    a_m = new[GM * GK]; b_m = new[GK * GN]; c_m = new[GM * GN];
    foreach (a_m[x]) begin a_m[x] = $urandom_range(14) - 7; mem.write32(A_BASE + 4 * x, i2f(a_m[x])); end
    foreach (b_m[x]) begin b_m[x] = $urandom_range(14) - 7; mem.write32(B_BASE + 4 * x, i2f(b_m[x])); end
    foreach (c_m[x]) begin c_m[x] = $urandom_range(40) - 20; mem.write32(C_BASE + 4 * x, i2f(c_m[x])); end
    mul = 0;
    t0 = $time;
    for (m = 0; m < GM; m += sm) begin
      exec(mk(OP_TSSM, 0, 0, 0, GM - m), r, cyc); sm = longint'(r);
      for (n = 0; n < GN; n += sn) begin
        exec(mk(OP_TSSN, 0, 0, 0, GN - n), r, cyc); sn = longint'(r);
        exec(mk(OP_TL, 1, 0, 0, C_BASE + 4 * (m * GN + n), 4 * GN, TILE_C), r, cyc);
        for (k = 0; k < GK; k += sk) begin
          exec(mk(OP_TSSK, 0, 0, 0, GK - k), r, cyc); sk = longint'(r);
          exec(mk(OP_TL, 2, 0, 0, A_BASE + 4 * (m * GK + k), 4 * GK, TILE_A), r, cyc);
          exec(mk(OP_TL, 3, 0, 0, B_BASE + 4 * (k * GN + n), 4 * GN, TILE_B), r, cyc);
          exec(mk(OP_TFMUL, 1, 2, 3), r, cyc);
          mul += cyc;
          chk({name, " tfmul cycles"}, cyc, sk * 4 + 2);
          if (sm == 16 && sn == 16 && sk == 16) chk({name, " 16x16x16 in 64 cycles"}, cyc - 2, 64);
        end
        exec(mk(OP_TSC, 1, 0, 0, C_BASE + 4 * (m * GN + n), 4 * GN), r, cyc);
      end
    end
    total = int'(($time - t0) / 10);
    for (int x = 0; x < GM; x++) for (int y = 0; y < GN; y++) begin
      int acc;
      acc = c_m[x * GN + y];
      for (int z = 0; z < GK; z++) acc += a_m[x * GK + z] * b_m[z * GN + y];
      chk($sformatf("%s C[%0d][%0d]", name, x, y), mem.read32(C_BASE + 4 * (x * GN + y)), i2f(acc));
    end
    $display("%s: M=%0d N=%0d K=%0d, %0d cycles, %0d in tile multiplies (%0d%%)",
             name, GM, GN, GK, total, mul, 100 * mul / total);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    gemm("attention QK^T", 32, 32, 64);
    gemm("pointwise conv", 16, 48, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
