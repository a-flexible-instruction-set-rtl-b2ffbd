// mte_csr: the 64-bit MTE control/status register, the tile-shape instructions tssm/tssn/tssk
// and the vector length register set by vsetvl.
//
// A tss instruction asks for a dimension size (rs1) and gets back, in rd, the size the hardware
// grants: the minimum of the request and the largest size the register geometry allows. With
// M = VLEN/RLEN rows per register, the largest sizes are (paper, Eq. 2 and 3):
//   uniform precision (SEW_i == SEW_o): M, N = RLEN/SEW, K = min(M, N)
//   mixed precision   (SEW_i <  SEW_o): M, N = min(M, RLEN/SEW_o), K = RLEN/SEW_i
// The 3-bit ttypeio immediate updates the SEW bits of ttypei/ttypeo before the limit is taken.
// Its encoding is this design's choice: bits [1:0] give SEW_i (8/16/32/64) and bit 2 set means
// widening, SEW_o = 2*SEW_i (capped at 64); bit 2 clear means SEW_o = SEW_i. The policy bits of
// ttype are kept; they are written, with the rest of the CSR, by OP_CSRW. rlenb is read-only.
// vsetvl (e32 only) grants vl = min(rs1, VLEN/32).
//
// Interface: one command per cycle on cmd_valid; rd_o is combinational and gives the granted
// value of the command on the inputs (tss, vsetvl) or the old CSR (csrw). The new state is
// visible the cycle after. Reset: tm = tn = tk = 0, both ttypes SEW 32 undisturbed, vl = 0.
module mte_csr
  import mte_pkg::*;
#(
  parameter int unsigned VLEN = VLEN_D,
  parameter int unsigned RLEN = RLEN_D
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  input  mte_op_e         cmd_op,       // OP_TSSM/OP_TSSN/OP_TSSK/OP_CSRW/OP_VSETVL
  input  logic [XLEN-1:0] cmd_rs1,
  input  logic [2:0]      cmd_ttypeio,
  output logic [XLEN-1:0] rd_o,
  output mte_csr_t        csr_o,
  output logic [15:0]     vl_o
);
  localparam int unsigned MROWS = VLEN / RLEN;
  localparam int unsigned VLMAX = VLEN / ELEN;
  localparam logic [11:0] RLENB = 12'(RLEN / 8);

  mte_csr_t csr_q, csr_d;
  logic [15:0] vl_q, vl_d;

  ttype_t ti_new, to_new;
  int unsigned sewi_b, sewo_b, mmax, nmax, kmax, lim;
  logic [XLEN-1:0] granted;

  always_comb begin
    // new element types from the immediate (tss only)
    ti_new = csr_q.ttypei;
    to_new = csr_q.ttypeo;
    ti_new.sew = sew_e'(cmd_ttypeio[1:0]);
    if (cmd_ttypeio[2] && cmd_ttypeio[1:0] != 2'd3) to_new.sew = sew_e'(cmd_ttypeio[1:0] + 2'd1);
    else                                             to_new.sew = sew_e'(cmd_ttypeio[1:0]);

    sewi_b = sew_bits(ti_new.sew);
    sewo_b = sew_bits(to_new.sew);
    mmax   = MROWS;
    if (sewi_b == sewo_b) begin
      nmax = RLEN / sewo_b;
      kmax = (mmax < nmax) ? mmax : nmax;
    end else begin
      nmax = ((RLEN / sewo_b) < mmax) ? RLEN / sewo_b : mmax;
      kmax = RLEN / sewi_b;
    end
    unique case (cmd_op)
      OP_TSSM: lim = mmax;
      OP_TSSN: lim = nmax;
      OP_TSSK: lim = kmax;
      default: lim = VLMAX;
    endcase
    if (lim > 4095) lim = 4095;
    granted = (cmd_rs1 < XLEN'(lim)) ? cmd_rs1 : XLEN'(lim);

    csr_d = csr_q;
    vl_d  = vl_q;
    rd_o  = granted;
    if (cmd_valid) begin
      unique case (cmd_op)
        OP_TSSM: begin csr_d.tm = DIMW'(granted); csr_d.ttypei = ti_new; csr_d.ttypeo = to_new; end
        OP_TSSN: begin csr_d.tn = DIMW'(granted); csr_d.ttypei = ti_new; csr_d.ttypeo = to_new; end
        OP_TSSK: begin csr_d.tk = DIMW'(granted); csr_d.ttypei = ti_new; csr_d.ttypeo = to_new; end
        OP_CSRW: begin csr_d = mte_csr_t'(cmd_rs1); csr_d.rlenb = RLENB; end
        OP_VSETVL: vl_d = 16'(granted);
        default: ;
      endcase
    end
    if (cmd_op == OP_CSRW) rd_o = XLEN'(csr_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_q        <= '0;
      csr_q.rlenb  <= RLENB;
      csr_q.ttypei <= '{row_agn: 1'b0, col_agn: 1'b0, sew: SEW32};
      csr_q.ttypeo <= '{row_agn: 1'b0, col_agn: 1'b0, sew: SEW32};
      vl_q         <= '0;
    end else begin
      csr_q <= csr_d;
      vl_q  <= vl_d;
    end
  end

  assign csr_o = csr_q;
  assign vl_o  = vl_q;

endmodule
