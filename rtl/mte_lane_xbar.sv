// mte_lane_xbar: the lane interconnect used in the execute stage.
//
// A tile row of RLEN bits holds COLS = RLEN/ELEN elements, so with NLANES lanes one step covers
// NLANES/COLS rows: lane l computes C[row, col] with col = l % COLS. For the k-th cvfma
// micro-op of a tile multiply (C += A[:,k] * B[k,:]) the lane needs
//   a = A[row, k]: the vs1 operand buffer of lane (l - col + k), read in the same step;
//   b = B[k, col]: the vs2 operand buffer of lane (k*COLS) % NLANES + col, read from slot
//       (k*COLS) / NLANES, which stays the same for all steps of the micro-op.
// With COLS == NLANES (the paper's Figure 5) b is lane-local, as the paper notes; with fewer
// columns than lanes the B row is spread over the lanes of one step and routed here. The
// paper describes the A routing ("the first cvfma accesses lane zero, the second lane one") and
// leaves the datapath to the existing lane interconnect; the selection network is this design's.
// The enable of each lane combines the vector tail (element < vlim), for cvfma the implicit
// column mask (col < tn), and, when vm is set, bit e of register v0 (read by every lane into its
// v0 buffer; bit e is in v0 word e/32, i.e. in lane (e/32) % NLANES).
// Other modes: XB_VX (a = own vs2, b = scalar), XB_BCAST (a = scalar), XB_IMAGE (a and the
// enable come from a register image held by the tile LSU or made by tvmask).
//
// Interface: purely combinational; lanes are packed [NLANES-1:0][ELEN-1:0].
module mte_lane_xbar
  import mte_pkg::*;
#(
  parameter int unsigned NLANES = NLANES_D,
  parameter int unsigned COLS   = RLEN_D / ELEN
) (
  input  uop_ctrl_t                      ctrl_i,
  input  logic [NLANES-1:0][ELEN-1:0]    vs1_i,
  input  logic [NLANES-1:0][ELEN-1:0]    vs2_i,
  input  logic [NLANES-1:0][ELEN-1:0]    v0_i,
  input  logic [ELEN-1:0]                scalar_i,
  input  logic [NLANES-1:0][ELEN-1:0]    img_i,
  input  logic [NLANES-1:0]              img_en_i,
  output logic [NLANES-1:0][ELEN-1:0]    a_o,
  output logic [NLANES-1:0][ELEN-1:0]    b_o,
  output logic [NLANES-1:0]              en_o
);
  initial begin
    assert (NLANES % COLS == 0) else $error("a tile row must not span lanes of two steps");
  end

  int unsigned kk, bbase, e, col;
  logic mbit;

  always_comb begin
    kk    = 32'(ctrl_i.k) % COLS;
    bbase = (32'(ctrl_i.k) * COLS) % NLANES;
    for (int unsigned l = 0; l < NLANES; l++) begin
      e    = 32'(ctrl_i.slot) * NLANES + l;
      col  = l % COLS;
      mbit = v0_i[(e / ELEN) % NLANES][e % ELEN] || !ctrl_i.vm;
      unique case (ctrl_i.mode)
        XB_CVFMA: begin
          a_o[l]  = vs1_i[l - col + kk];
          b_o[l]  = vs2_i[bbase + col];
          en_o[l] = (e < 32'(ctrl_i.vlim)) && (col < 32'(ctrl_i.ncols)) && mbit;
        end
        XB_VX: begin
          a_o[l]  = vs2_i[l];
          b_o[l]  = scalar_i;
          en_o[l] = (e < 32'(ctrl_i.vlim)) && mbit;
        end
        XB_BCAST: begin
          a_o[l]  = scalar_i;
          b_o[l]  = scalar_i;
          en_o[l] = (e < 32'(ctrl_i.vlim)) && mbit;
        end
        default: begin
          a_o[l]  = img_i[l];
          b_o[l]  = '0;
          en_o[l] = img_en_i[l];
        end
      endcase
    end
  end

endmodule
