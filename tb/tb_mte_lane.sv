// tb_mte_lane: self-checking test of one mte_lane. A shadow copy of the VRF slice is kept in
// the testbench. Every register slot is first written through the move path; then random
// micro-ops (move, integer multiply / multiply-accumulate, fp32 multiply / fma on
// integer-valued floats so that the exact result is known) are run through the read, execute
// and write-back stages and read back through all four operand buffers. Disabled elements must
// stay unchanged. The pipeline timing is checked too: a result is not visible to a read issued
// one cycle after its execute stage, and is visible two cycles after.
module tb_mte_lane;
  import mte_pkg::*;
  localparam int unsigned NREGS = 32, SLOTS = 4;

  logic clk = 0, rst_n = 0;
  lane_rd_t rd = '0;
  logic [31:0] ovd, ovs1, ovs2, ov0;
  logic ex_valid = 0, ex_en = 0;
  lane_op_e ex_op = LOP_MOVE;
  logic [4:0] ex_wreg = 0;
  logic [7:0] ex_wslot = 0;
  logic [31:0] ex_a = 0, ex_b = 0;
  logic [31:0] shadow [NREGS][SLOTS];
  int checks = 0, failures = 0;

  mte_lane #(.NREGS(NREGS), .SLOTS(SLOTS)) dut (.clk, .rst_n, .rd_i(rd), .obuf_vd_o(ovd),
    .obuf_vs1_o(ovs1), .obuf_vs2_o(ovs2), .obuf_v0_o(ov0), .ex_valid_i(ex_valid), .ex_op_i(ex_op),
    .ex_wreg_i(ex_wreg), .ex_wslot_i(ex_wslot), .ex_a_i(ex_a), .ex_b_i(ex_b), .ex_en_i(ex_en));

  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [31:0] i2f(int v);   // exact for |v| < 2^24
    logic [31:0] m; int e; logic s;
    if (v == 0) return 0;
    s = v < 0; m = s ? -v : v; e = 0;
    for (int i = 0; i < 32; i++) if (m[i]) e = i;
    return {s, 8'(127 + e), 23'(m << (23 - e))};
  endfunction

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic read_regs(int r1, int s1, int r2, int s2, int r3, int s3, int s0);
    @(negedge clk);
    rd = '0; rd.en = 1;
    rd.vd_reg = 5'(r1); rd.vd_slot = 8'(s1); rd.vs1_reg = 5'(r2); rd.vs1_slot = 8'(s2);
    rd.vs2_reg = 5'(r3); rd.vs2_slot = 8'(s3); rd.v0_slot = 8'(s0);
    @(negedge clk);
    rd.en = 0;
    chk("vd", ovd, shadow[r1][s1]); chk("vs1", ovs1, shadow[r2][s2]);
    chk("vs2", ovs2, shadow[r3][s3]); chk("v0", ov0, shadow[0][s0]);
  endtask

  // one micro-op: read vd(r,s) into the buffer, execute, write back
  task automatic uop(lane_op_e op, int r, int s, logic [31:0] a, logic [31:0] b, logic en,
                     logic [31:0] exp);
    @(negedge clk);
    rd = '0; rd.en = 1; rd.vd_reg = 5'(r); rd.vd_slot = 8'(s);
    @(negedge clk);
    rd.en = 0;
    ex_valid = 1; ex_op = op; ex_a = a; ex_b = b; ex_en = en; ex_wreg = 5'(r); ex_wslot = 8'(s);
    @(negedge clk);
    ex_valid = 0; ex_en = 0;
    if (en) shadow[r][s] = exp;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NREGS; r++)
      for (int s = 0; s < SLOTS; s++) begin
        shadow[r][s] = $urandom;
        uop(LOP_MOVE, r, s, shadow[r][s], 0, 1'b1, shadow[r][s]);
      end
    @(negedge clk);
    for (int r = 0; r < NREGS; r++) for (int s = 0; s < SLOTS; s++)
      read_regs(r, s, (r + 3) % NREGS, (s + 1) % SLOTS, (r + 7) % NREGS, (s + 2) % SLOTS, s);
    for (int t = 0; t < 1500; t++) begin
      int r, s, x, y, z;
      lane_op_e op;
      logic en;
      logic [31:0] a, b, exp;
      r = $urandom_range(NREGS - 1); s = $urandom_range(SLOTS - 1);
      op = lane_op_e'($urandom_range(4));
      en = ($urandom_range(7) != 0);
      x = $urandom_range(2000) - 1000; y = $urandom_range(2000) - 1000; z = $urandom_range(4000) - 2000;
      if (op == LOP_MUL_F || op == LOP_MAC_F) begin
        // make the accumulator an integer-valued float first
        uop(LOP_MOVE, r, s, i2f(z), 0, 1'b1, i2f(z));
        @(negedge clk);
        a = i2f(x); b = i2f(y);
        exp = (op == LOP_MUL_F) ? i2f(x * y) : i2f(z + x * y);
      end else begin
        a = $urandom; b = $urandom;
        case (op)
          LOP_MOVE:  exp = a;
          LOP_MUL_I: exp = a * b;
          default:   exp = shadow[r][s] + a * b;
        endcase
      end
      uop(op, r, s, a, b, en, exp);
      @(negedge clk);
      read_regs(r, s, $urandom_range(NREGS - 1), $urandom_range(SLOTS - 1),
                $urandom_range(NREGS - 1), $urandom_range(SLOTS - 1), $urandom_range(SLOTS - 1));
    end
    // timing: execute at cycle t, read at t+1 sees the old value, read at t+2 the new one
    begin
      logic [31:0] old;
      old = shadow[5][1];
      uop(LOP_MOVE, 5, 1, 32'hcafe_f00d, 0, 1'b1, 32'hcafe_f00d);
      // uop() returned one cycle after the execute stage: the write-back buffer is still full
      rd = '0; rd.en = 1; rd.vd_reg = 5; rd.vd_slot = 1;
      @(negedge clk);
      chk("read in write-back cycle sees old value", ovd, old);
      @(negedge clk);
      chk("read after write-back sees new value", ovd, 32'hcafe_f00d);
      rd.en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
