// mte_tile_lsu: memory side of the MTE tile loads t{t}l[a,b,c,bt] and stores t{t}sc.
//
// A tile of `rows` x `cols` elements sits in a vector register as ROWS = VLEN/RLEN rows of
// COLS = RLEN/ELEN elements, element (r, c) in register element r*COLS + c. In memory the tile
// is a set of rows, each up to RLEN bits of consecutive bytes, `stride` bytes apart (the BLAS
// leading dimension). A plain access moves memory row i to register row i; a transposed access
// (ttl/tts) moves memory row i to register column i, so it issues `cols` memory rows of `rows`
// elements. The unit keeps a full register image: a load fills it from memory and then the
// sequencer writes it into the lanes; a store first captures the register from the lanes, one
// step at a time, and then writes it out. A load with stride 0 is a row (or, transposed,
// column) broadcast: one memory row is read and copied to every row (column); the paper allows
// this optimisation and this unit makes it.
// Inactive elements: with the undisturbed policy their enable is off and the register keeps
// them; with the agnostic policy they are written with zero. Columns beyond `cols` in active
// rows follow the column policy bit, rows beyond `rows` the row (tail) policy bit. Stores write
// only the bytes of active elements (byte enables).
// Splitting a tile into rows of at most RLEN bits follows the paper; the image buffer, the
// memory port and the policy handling are this design's. Elements are 32 bits (SEW 32).
//
// Memory port: one request per cycle when req_valid_o && req_ready_i; every request, load or
// store, gets exactly one response (rsp_valid_i), in order; a load response carries RLEN/8
// bytes starting at the request address, byte 0 in bits [7:0]. done_o pulses when all
// responses of the operation are in; image_o/image_en_o then hold the loaded tile.
module mte_tile_lsu
  import mte_pkg::*;
#(
  parameter int unsigned VLEN   = VLEN_D,
  parameter int unsigned RLEN   = RLEN_D,
  parameter int unsigned NLANES = NLANES_D
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // command
  input  logic                           start_i,
  input  logic                           store_i,
  input  logic                           trans_i,
  input  logic [11:0]                    rows_i,
  input  logic [11:0]                    cols_i,
  input  logic [XLEN-1:0]                base_i,
  input  logic [XLEN-1:0]                stride_i,
  input  logic                           col_agn_i,
  input  logic                           row_agn_i,
  output logic                           busy_o,
  output logic                           done_o,
  output logic                           bcast_o,     // pulse: a zero-stride broadcast load ran
  // register image
  output logic [VLEN/ELEN-1:0][ELEN-1:0] image_o,
  output logic [VLEN/ELEN-1:0]           image_en_o,
  input  logic                           capture_i,
  input  logic [7:0]                     capture_slot_i,
  input  logic [NLANES-1:0][ELEN-1:0]    capture_data_i,
  // memory
  output logic                           req_valid_o,
  input  logic                           req_ready_i,
  output logic                           req_we_o,
  output logic [XLEN-1:0]                req_addr_o,
  output logic [RLEN-1:0]                req_wdata_o,
  output logic [RLEN/8-1:0]              req_be_o,
  input  logic                           rsp_valid_i,
  input  logic [RLEN-1:0]                rsp_rdata_i
);
  localparam int unsigned ROWS  = VLEN / RLEN;
  localparam int unsigned COLS  = RLEN / ELEN;
  localparam int unsigned NW    = VLEN / ELEN;
  localparam int unsigned SLOTS = NW / NLANES;

  initial begin
    assert (ROWS <= COLS) else $error("a transposed row of ROWS elements must fit in RLEN bits");
  end

  logic [ROWS-1:0][COLS-1:0][ELEN-1:0] img_q;
  logic [NW-1:0]   en_q;
  logic            busy_q, store_q, trans_q, bcast_q;
  logic [11:0]     rows_q, cols_q;
  logic [XLEN-1:0] base_q, stride_q;
  logic [12:0]     nmem_q, issued_q, rcvd_q;

  assign busy_o     = busy_q;
  assign image_o    = img_q;
  assign image_en_o = en_q;

  // number of memory rows and of requests
  logic [12:0] nmem_d, nreq_d;
  always_comb begin
    nmem_d = trans_i ? 13'(cols_i) : 13'(rows_i);
    nreq_d = (!store_i && stride_i == '0 && nmem_d != '0) ? 13'd1 : nmem_d;
  end

  // request generation
  always_comb begin
    req_valid_o = busy_q && (issued_q < (bcast_q ? 13'(nmem_q != 0) : nmem_q));
    req_we_o    = store_q;
    req_addr_o  = base_q + XLEN'(issued_q) * stride_q;
    req_wdata_o = '0;
    req_be_o    = '0;
    for (int unsigned j = 0; j < COLS; j++) begin
      if (!trans_q) begin
        req_wdata_o[j*ELEN +: ELEN] = img_q[issued_q[$clog2(ROWS)-1:0]][j];
        if (j < 32'(cols_q)) req_be_o[j*(ELEN/8) +: ELEN/8] = '1;
      end else if (j < ROWS) begin
        req_wdata_o[j*ELEN +: ELEN] = img_q[j][issued_q[$clog2(COLS)-1:0]];
        if (j < 32'(rows_q)) req_be_o[j*(ELEN/8) +: ELEN/8] = '1;
      end
    end
  end

  logic [12:0] nreq_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0; done_o <= 1'b0; bcast_o <= 1'b0;
      issued_q <= '0; rcvd_q <= '0; nmem_q <= '0; nreq_q <= '0;
      store_q <= 1'b0; trans_q <= 1'b0; bcast_q <= 1'b0;
      rows_q <= '0; cols_q <= '0; base_q <= '0; stride_q <= '0;
    end else begin
      done_o  <= 1'b0;
      bcast_o <= 1'b0;
      if (start_i && !busy_q) begin
        busy_q   <= 1'b1;
        store_q  <= store_i;
        trans_q  <= trans_i;
        bcast_q  <= !store_i && stride_i == '0;
        rows_q   <= rows_i;
        cols_q   <= cols_i;
        base_q   <= base_i;
        stride_q <= stride_i;
        nmem_q   <= nmem_d;
        nreq_q   <= nreq_d;
        issued_q <= '0;
        rcvd_q   <= '0;
      end else if (busy_q) begin
        if (req_valid_o && req_ready_i) issued_q <= issued_q + 1'b1;
        if (rsp_valid_i) rcvd_q <= rcvd_q + 1'b1;
        if (rcvd_q + 13'(rsp_valid_i) == nreq_q) begin
          busy_q  <= 1'b0;
          done_o  <= 1'b1;
          bcast_o <= bcast_q && nreq_q != '0;
        end
      end
    end
  end

  // image: cleared and enables set at a load's start, filled by load responses or by captures
  always_ff @(posedge clk) begin
    if (start_i && !busy_q && !store_i) begin
      img_q <= '0;
      for (int unsigned w = 0; w < NW; w++) begin
        if ((w / COLS) < 32'(rows_i))
          en_q[w] <= ((w % COLS) < 32'(cols_i)) || col_agn_i;
        else
          en_q[w] <= row_agn_i;
      end
    end else if (busy_q && !store_q && rsp_valid_i) begin
      for (int unsigned i = 0; i < ROWS; i++) begin
        for (int unsigned j = 0; j < COLS; j++) begin
          if (!trans_q) begin
            // memory row rcvd_q (or every row when broadcasting) -> register row
            if ((bcast_q || i == 32'(rcvd_q)) && i < 32'(rows_q) && j < 32'(cols_q))
              img_q[i][j] <= rsp_rdata_i[j*ELEN +: ELEN];
          end else begin
            // memory row rcvd_q (or every row) -> register column; element i of the row
            if ((bcast_q || j == 32'(rcvd_q)) && i < 32'(rows_q) && j < 32'(cols_q))
              img_q[i][j] <= rsp_rdata_i[i*ELEN +: ELEN];
          end
        end
      end
    end else if (capture_i) begin
      for (int unsigned l = 0; l < NLANES; l++) begin
        img_q[(32'(capture_slot_i) * NLANES + l) / COLS][(32'(capture_slot_i) * NLANES + l) % COLS]
          <= capture_data_i[l];
      end
    end
  end

  initial begin
    assert (SLOTS * NLANES == NW) else $error("VLEN must be a multiple of NLANES*ELEN");
  end

endmodule
