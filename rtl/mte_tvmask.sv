// mte_tvmask: mask generator of the tvmask[a,b,c,bt] instructions.
//
// To run ordinary (masked) vector instructions on a tile held in a vector register, software
// sets the vector length to cover the active rows and needs a mask that turns off the inactive
// columns of every row. A register holds rows of RLEN bits, i.e. COLS = RLEN/SEW elements, so
// element e lies in row e / COLS and column e % COLS. Mask bit e is set when that row and column
// are active for the chosen tile kind and e < rs1 (the vector length the mask is made for):
//   A: tm rows x tk columns      B: tk x tn      C: tm x tn      B^T: tn x tk
// SEW is taken from ttypeo for C and from ttypei for the other kinds. The paper gives the
// purpose of tvmask; the use of rs1 as an upper element bound is this design's choice, taken
// from how the GEMM kernel calls it, tvmaskc(gvl).
//
// Interface: purely combinational. mask_o bit e is RVV mask bit e of the destination register;
// bits from VLEN/SEW upward are 0.
module mte_tvmask
  import mte_pkg::*;
#(
  parameter int unsigned VLEN = VLEN_D,
  parameter int unsigned RLEN = RLEN_D
) (
  input  mte_csr_t        csr_i,
  input  tile_e           tile_i,
  input  logic [XLEN-1:0] rs1_i,
  output logic [VLEN/8-1:0] mask_o
);
  localparam int unsigned RLOG = $clog2(RLEN);

  sew_e        sew;
  logic [11:0] rows, cols;
  int unsigned clog, nel;

  always_comb begin
    unique case (tile_i)
      TILE_A:  begin rows = csr_i.tm; cols = csr_i.tk; sew = csr_i.ttypei.sew; end
      TILE_B:  begin rows = csr_i.tk; cols = csr_i.tn; sew = csr_i.ttypei.sew; end
      TILE_C:  begin rows = csr_i.tm; cols = csr_i.tn; sew = csr_i.ttypeo.sew; end
      default: begin rows = csr_i.tn; cols = csr_i.tk; sew = csr_i.ttypei.sew; end
    endcase
    clog = RLOG - 3 - 32'(sew);       // log2(COLS)
    nel  = VLEN >> (3 + 32'(sew));    // VLEN/SEW
    for (int unsigned e = 0; e < VLEN / 8; e++) begin
      mask_o[e] = (e < nel) && ((e >> clog) < 32'(rows)) &&
                  ((e & ((32'd1 << clog) - 1)) < 32'(cols)) && (64'(e) < rs1_i);
    end
  end

endmodule
