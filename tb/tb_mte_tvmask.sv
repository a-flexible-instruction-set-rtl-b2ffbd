// tb_mte_tvmask: self-checking test of mte_tvmask. For random tile shapes, element types, tile
// kinds and vector lengths the expected mask is built the other way round: start from zero and
// set bit r*COLS + c for every active row r and column c, then clear bits >= rs1.
// The DUT is combinational and is sampled 1 ns after each input change. The row-by-row
// placement of tile elements follows the paper; using rs1 as an element bound is this design's
// reading of the instruction's operand.
module tb_mte_tvmask;
  import mte_pkg::*;
  localparam int unsigned VLEN = 8192, RLEN = 512;

  mte_csr_t csr;
  tile_e tile;
  logic [63:0] rs1;
  logic [VLEN/8-1:0] mask, exp;
  int checks = 0, failures = 0;
  logic clk = 0;

  mte_tvmask #(.VLEN(VLEN), .RLEN(RLEN)) dut (.csr_i(csr), .tile_i(tile), .rs1_i(rs1), .mask_o(mask));

  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int unsigned rows, cols, ncols, sew, nrows_max, bits;
    for (int t = 0; t < 400; t++) begin
      csr = '0;
      csr.ttypei.sew = sew_e'($urandom_range(3));
      csr.ttypeo.sew = sew_e'($urandom_range(3));
      csr.tm = 12'($urandom_range(17));
      csr.tn = 12'($urandom_range(65));
      csr.tk = 12'($urandom_range(65));
      tile = tile_e'($urandom_range(3));
      rs1 = (t % 2) ? 64'($urandom_range(1100)) : 64'd5000;
      case (tile)
        TILE_A: begin rows = csr.tm; cols = csr.tk; sew = 8 << csr.ttypei.sew; end
        TILE_B: begin rows = csr.tk; cols = csr.tn; sew = 8 << csr.ttypei.sew; end
        TILE_C: begin rows = csr.tm; cols = csr.tn; sew = 8 << csr.ttypeo.sew; end
        default: begin rows = csr.tn; cols = csr.tk; sew = 8 << csr.ttypei.sew; end
      endcase
      ncols = RLEN / sew;
      nrows_max = VLEN / RLEN;
      exp = '0;
      for (int unsigned r = 0; r < nrows_max && r < rows; r++)
        for (int unsigned c = 0; c < ncols && c < cols; c++)
          if (r * ncols + c < rs1) exp[r * ncols + c] = 1'b1;
      #1;
      checks++;
      if (mask !== exp) begin
        failures++;
        $display("FAIL tile %0d rows %0d cols %0d sew %0d rs1 %0d", tile, rows, cols, sew, rs1);
      end
      bits = 0;
      @(posedge clk);
    end
    // Figure 4 style example: 16 rows of 16 fp32, 12x10 active
    csr = '0; csr.ttypeo.sew = SEW32; csr.tm = 12; csr.tn = 10; tile = TILE_C; rs1 = 256;
    #1 checks++;
    if (mask[9:0] != 10'h3ff || mask[15:10] != 0 || mask[16*11 +: 16] != 16'h03ff || mask[16*12 +: 16] != 0)
      begin failures++; $display("FAIL example"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
