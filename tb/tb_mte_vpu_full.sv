// tb_mte_vpu_full: end-to-end test of mte_vpu at its default size (VLEN 8192, RLEN 512,
// 64 lanes, 32 registers: 16x16x16 fp32 tiles), running a 20x18x17 SGEMM, which needs full
// 16x16x16 tiles (checked to take 64 cycles of cvfma issue) and partial ones; see
// tb_mte_vpu_body.svh.
// No parameter is set on the unit. Instructions are issued one at a time on a valid/ready
// port; memory is a behavioural model with latency 3 and random back-pressure. The 64-cycle
// figure is the paper's dynamic latency for this configuration.
module tb_mte_vpu_full;
  localparam int unsigned VLEN = 8192, RLEN = 512, NLANES = 64;
  localparam int GM = 20, GN = 18, GK = 17;
`define MTE_VPU_INST \
  mte_vpu dut (.clk, .rst_n, .in_valid, .in_ready, \
    .in_instr(ins), .rsp_valid, .rsp_data, .mem_req_valid, .mem_req_ready, .mem_req_we, \
    .mem_req_addr, .mem_req_wdata, .mem_req_be, .mem_rsp_valid, .mem_rsp_rdata, .ev_stall, \
    .ev_cvfma, .ev_bcast);
`include "tb_mte_vpu_body.svh"
  initial begin repeat (400000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
