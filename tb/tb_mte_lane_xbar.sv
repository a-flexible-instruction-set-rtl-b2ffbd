// tb_mte_lane_xbar: self-checking test of the lane interconnect. The testbench holds whole
// registers (A, B, v0) as element arrays, fills the operand buffers of all lanes from the slot
// the sequencer would read, and checks each lane's operands against the matrix view: for cvfma
// k at step s, lane l works on C element e = s*NLANES + l = (row, col) and must see
// a = A[row*COLS + k], b = B[k*COLS + col], and be enabled when e < vlim, col < ncols and
// (if masked) bit e of v0 is set. The vector-scalar, broadcast and image modes are checked too.
// The block is combinational and is sampled 1 ns after each input change. The cvfma operand
// indices follow the paper's decomposition of a tile multiply; the row-group placement for
// fewer columns than lanes is this design's own.
module tb_mte_lane_xbar;
  import mte_pkg::*;
  localparam int unsigned NLANES = 64, COLS = 16, NEL = 256, SLOTS = NEL / NLANES;

  uop_ctrl_t ctrl;
  logic [NLANES-1:0][31:0] vs1, vs2, v0, img, a, b;
  logic [NLANES-1:0] img_en, en;
  logic [31:0] scalar;
  logic [31:0] areg [NEL], breg [NEL], v0reg [NEL];
  int checks = 0, failures = 0;
  logic clk = 0;

  mte_lane_xbar #(.NLANES(NLANES), .COLS(COLS)) dut (.ctrl_i(ctrl), .vs1_i(vs1), .vs2_i(vs2),
    .v0_i(v0), .scalar_i(scalar), .img_i(img), .img_en_i(img_en), .a_o(a), .b_o(b), .en_o(en));

  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      int unsigned s, k, sb, s0, e, row, col;
      foreach (areg[i]) begin areg[i] = $urandom; breg[i] = $urandom; v0reg[i] = $urandom; end
      s = $urandom_range(SLOTS - 1);
      k = $urandom_range(COLS - 1);
      sb = (k * COLS) / NLANES;
      s0 = (s * NLANES / 32) / NLANES;
      for (int l = 0; l < NLANES; l++) begin
        vs1[l] = areg[s * NLANES + l];
        vs2[l] = breg[sb * NLANES + l];
        v0[l]  = v0reg[s0 * NLANES + l];
        img[l] = $urandom; img_en[l] = 1'($urandom);
      end
      scalar = $urandom;
      ctrl = '0;
      ctrl.valid = 1; ctrl.slot = 8'(s); ctrl.k = 12'(k);
      ctrl.vlim = 16'($urandom_range(NEL)); ctrl.ncols = 12'($urandom_range(COLS));
      ctrl.vm = 1'($urandom);
      ctrl.mode = xbar_mode_e'(t % 4);
      #1;
      for (int l = 0; l < NLANES; l++) begin
        logic m;
        e = s * NLANES + l; row = e / COLS; col = e % COLS;
        m = !ctrl.vm || v0reg[e / 32][e % 32];
        case (ctrl.mode)
          XB_CVFMA: begin
            chk("cvfma a", a[l], areg[row * COLS + k]);
            chk("cvfma b", b[l], breg[k * COLS + col]);
            chk("cvfma en", 32'(en[l]), 32'(e < ctrl.vlim && col < ctrl.ncols && m));
          end
          XB_VX: begin
            chk("vx a", a[l], breg[sb * NLANES + l]);
            chk("vx b", b[l], scalar);
            chk("vx en", 32'(en[l]), 32'(e < ctrl.vlim && m));
          end
          XB_BCAST: begin
            chk("bcast a", a[l], scalar);
            chk("bcast en", 32'(en[l]), 32'(e < ctrl.vlim && m));
          end
          default: begin
            chk("img a", a[l], img[l]);
            chk("img en", 32'(en[l]), 32'(img_en[l]));
          end
        endcase
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
