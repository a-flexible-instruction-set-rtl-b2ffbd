// tb_mte_vpu: end-to-end test of mte_vpu at a reduced size (VLEN 2048, RLEN 256, 16 lanes:
// 8x8x8 fp32 tiles, 4 steps per cvfma at full height, fewer than 3 steps - hence bubbles - for
// tiles of up to 4 rows) running an 11x13x10 SGEMM with partial tiles; see tb_mte_vpu_body.svh.
// Instructions are issued one at a time on a valid/ready port; memory is a behavioural model
// with latency 3 and random back-pressure. The sizes are reduced from the default to keep the
// run short; the kernel structure follows the paper's GEMM algorithm.
module tb_mte_vpu;
  localparam int unsigned VLEN = 2048, RLEN = 256, NLANES = 16;
  localparam int GM = 11, GN = 13, GK = 10;
`define MTE_VPU_INST \
  mte_vpu #(.VLEN(VLEN), .RLEN(RLEN), .NLANES(NLANES)) dut (.clk, .rst_n, .in_valid, .in_ready, \
    .in_instr(ins), .rsp_valid, .rsp_data, .mem_req_valid, .mem_req_ready, .mem_req_we, \
    .mem_req_addr, .mem_req_wdata, .mem_req_be, .mem_rsp_valid, .mem_rsp_rdata, .ev_stall, \
    .ev_cvfma, .ev_bcast);
`include "tb_mte_vpu_body.svh"
  initial begin repeat (400000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
