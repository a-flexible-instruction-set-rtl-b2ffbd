// tb_mte_csr: self-checking test of mte_csr. Random tss requests with random element types;
// the granted size is compared with the paper's limits computed here from the SEW values:
// uniform M = VLEN/RLEN, N = RLEN/SEW, K = min(M, N); mixed M, N = min(M, RLEN/SEW_o),
// K = RLEN/SEW_i. Also checks csrw (rlenb stays read-only), vsetvl and the reset values.
// The DUT answers one cycle after a command, so every command is followed by one clock before
// the answer is compared. The size limits are the paper's formulas; the encoding of the
// element-type immediate (bits 1:0 the input SEW, bit 2 widening) is this design's own.
module tb_mte_csr;
  import mte_pkg::*;
  localparam int unsigned VLEN = 8192, RLEN = 512;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  mte_op_e cmd_op = OP_TSSM;
  logic [63:0] cmd_rs1 = '0, rd;
  logic [2:0] cmd_ttypeio = '0;
  mte_csr_t csr;
  logic [15:0] vl;
  int checks = 0, failures = 0;

  mte_csr #(.VLEN(VLEN), .RLEN(RLEN)) dut (.clk, .rst_n, .cmd_valid, .cmd_op, .cmd_rs1,
    .cmd_ttypeio, .rd_o(rd), .csr_o(csr), .vl_o(vl));

  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic int unsigned lim(mte_op_e op, int unsigned si, int unsigned so);
    int unsigned m, n, k;
    m = VLEN / RLEN;
    if (si == so) begin n = RLEN / so; k = (m < n) ? m : n; end
    else begin n = (RLEN / so < m) ? RLEN / so : m; k = RLEN / si; end
    return op == OP_TSSM ? m : op == OP_TSSN ? n : k;
  endfunction

  initial begin
    int unsigned si, so, req, exp;
    logic [2:0] imm;
    mte_op_e op;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset tm", csr.tm, 0);
    check("reset rlenb", csr.rlenb, RLEN / 8);
    check("reset sew", csr.ttypeo.sew, SEW32);
    check("reset vl", vl, 0);
    // the paper's examples: 32-bit uniform 16x16x16, 16->32 mixed 16x16x32
    for (int t = 0; t < 600; t++) begin
      imm = 3'($urandom);
      op  = mte_op_e'($urandom_range(2));
      req = (t % 3 == 0) ? $urandom_range(5000) : $urandom_range(70);
      si  = 8 << imm[1:0];
      so  = (imm[2] && imm[1:0] != 3) ? si * 2 : si;
      exp = lim(op, si, so);
      if (req < exp) exp = req;
      @(negedge clk);
      cmd_valid = 1; cmd_op = op; cmd_rs1 = 64'(req); cmd_ttypeio = imm;
      #1 check($sformatf("rd op%0d imm%0d req%0d", op, imm, req), rd, exp);
      @(negedge clk);
      cmd_valid = 0;
      check("field", op == OP_TSSM ? csr.tm : op == OP_TSSN ? csr.tn : csr.tk, exp);
      check("sewi", sew_bits(csr.ttypei.sew), si);
      check("sewo", sew_bits(csr.ttypeo.sew), so);
    end
    // paper example: SEW_i 16, SEW_o 32 gives 16x16x32
    @(negedge clk); cmd_valid = 1; cmd_op = OP_TSSK; cmd_rs1 = 1000; cmd_ttypeio = 3'b101;
    #1 check("mixed K", rd, 32);
    cmd_op = OP_TSSN; #1 check("mixed N", rd, 16);
    cmd_ttypeio = 3'b010; #1 check("uniform N", rd, 16);
    cmd_op = OP_TSSK; #1 check("uniform K", rd, 16);
    // csrw
    @(negedge clk); cmd_op = OP_CSRW; cmd_rs1 = 64'h0123_4567_89ab_cdef;
    @(negedge clk); cmd_valid = 0;
    check("csrw tm", csr.tm, 12'hdef);
    check("csrw tk", csr.tk, 12'h789);
    check("csrw rlenb read-only", csr.rlenb, RLEN / 8);
    check("csrw ttypei", csr.ttypei, 4'h6);
    // vsetvl
    @(negedge clk); cmd_valid = 1; cmd_op = OP_VSETVL; cmd_rs1 = 100;
    #1 check("vsetvl rd", rd, 100);
    @(negedge clk); check("vl", vl, 100); cmd_rs1 = 9999;
    #1 check("vsetvl max", rd, VLEN / 32);
    @(negedge clk); cmd_valid = 0; check("vl max", vl, VLEN / 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
