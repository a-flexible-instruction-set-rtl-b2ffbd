// mte_lane: one lane of the vector unit (the structure of the paper's Figure 1).
//
// The vector register file is interleaved over the lanes: element e of every register lives in
// lane e % NLANES, in slot e / NLANES of that lane's VRF slice, so a lane holds SLOTS = VLEN /
// (ELEN*NLANES) elements of each register and an instruction over VL elements takes VL/NLANES
// steps. Each lane has three operand buffers, vd, vs1 and vs2, filled from the VRF slice; a
// fourth read of register v0 supplies the mask word. The lane interconnect (mte_lane_xbar, in
// the unit) turns the buffers of all lanes into the a and b operands of each lane; the c operand
// is always the lane's own vd buffer. The functional units are the FPU (fp32_fma) and an
// integer ALU (multiply, multiply-accumulate, move). The result goes to the write-back buffer
// and from there into the VRF slice.
//
// Pipeline, one micro-op per cycle:
//   R  rd_i.en: the four VRF reads are latched into the operand buffers (obuf_*_o).
//   E  ex_op_i/ex_a_i/ex_b_i/ex_en_i: the FU result is latched into the write-back buffer.
//   W  the write-back buffer is written into the VRF slice.
// A value written in W can be read by a micro-op whose R cycle is at least one cycle after W,
// i.e. three cycles after the R cycle of the micro-op that produced it; the sequencer keeps that
// distance. Element enables turned off leave the VRF element unchanged (undisturbed).
// The VRF is not reset (its contents are architecturally undefined after reset); the pipeline
// valid bit is.
module mte_lane
  import mte_pkg::*;
#(
  parameter int unsigned NREGS = NREGS_D,
  parameter int unsigned SLOTS = VLEN_D / (ELEN * NLANES_D)
) (
  input  logic            clk,
  input  logic            rst_n,
  // R stage
  input  lane_rd_t        rd_i,
  output logic [ELEN-1:0] obuf_vd_o,
  output logic [ELEN-1:0] obuf_vs1_o,
  output logic [ELEN-1:0] obuf_vs2_o,
  output logic [ELEN-1:0] obuf_v0_o,
  // E stage
  input  logic            ex_valid_i,
  input  lane_op_e        ex_op_i,
  input  logic [4:0]      ex_wreg_i,
  input  logic [7:0]      ex_wslot_i,
  input  logic [ELEN-1:0] ex_a_i,
  input  logic [ELEN-1:0] ex_b_i,
  input  logic            ex_en_i
);
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int unsigned RW = $clog2(NREGS);

  logic [ELEN-1:0] vrf [NREGS][SLOTS];

  // ---- R: VRF slice -> operand buffers ----
  always_ff @(posedge clk) begin
    if (rd_i.en) begin
      obuf_vd_o  <= vrf[rd_i.vd_reg[RW-1:0]][rd_i.vd_slot[SW-1:0]];
      obuf_vs1_o <= vrf[rd_i.vs1_reg[RW-1:0]][rd_i.vs1_slot[SW-1:0]];
      obuf_vs2_o <= vrf[rd_i.vs2_reg[RW-1:0]][rd_i.vs2_slot[SW-1:0]];
      obuf_v0_o  <= vrf[0][rd_i.v0_slot[SW-1:0]];
    end
  end

  // ---- E: functional units ----
  logic [ELEN-1:0] fpu_c, fpu_r, alu_r, res;
  assign fpu_c = (ex_op_i == LOP_MUL_F) ? 32'h8000_0000 : obuf_vd_o;  // a*b + (-0) == a*b

  fp32_fma u_fpu (.a_i(ex_a_i), .b_i(ex_b_i), .c_i(fpu_c), .r_o(fpu_r));

  always_comb begin
    unique case (ex_op_i)
      LOP_MUL_I: alu_r = ex_a_i * ex_b_i;
      LOP_MAC_I: alu_r = obuf_vd_o + ex_a_i * ex_b_i;
      default:   alu_r = ex_a_i;
    endcase
    res = (ex_op_i == LOP_MUL_F || ex_op_i == LOP_MAC_F) ? fpu_r : alu_r;
  end

  // ---- write-back buffer ----
  logic            wb_valid;
  logic [4:0]      wb_reg;
  logic [7:0]      wb_slot;
  logic [ELEN-1:0] wb_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb_valid <= 1'b0;
    else        wb_valid <= ex_valid_i && ex_en_i;
  end

  always_ff @(posedge clk) begin
    wb_reg  <= ex_wreg_i;
    wb_slot <= ex_wslot_i;
    wb_data <= res;
  end

  // ---- W: write-back buffer -> VRF slice ----
  always_ff @(posedge clk) begin
    if (wb_valid) vrf[wb_reg[RW-1:0]][wb_slot[SW-1:0]] <= wb_data;
  end

endmodule
