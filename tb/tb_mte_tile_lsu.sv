// tb_mte_tile_lsu: self-checking test of the tile load/store unit against a behavioural memory
// with random back-pressure. Loads (plain, transposed, zero-stride broadcast; undisturbed and
// agnostic policies) are checked element by element against the bytes placed in memory, and the
// number of memory requests is checked (one per memory row, one for a broadcast). Stores
// capture a random register image through the lane-capture port and are checked against
// memory, including bytes that must not be written.
// Commands start with a one-cycle start pulse and end with done; memory is a behavioural model
// answering in order. Row-wise strided access and zero-stride broadcast follow the paper; the
// request format (one RLEN-bit row with byte enables) is this design's own.
module tb_mte_tile_lsu;
  import mte_pkg::*;
  localparam int unsigned VLEN = 8192, RLEN = 512, NLANES = 64;
  localparam int unsigned ROWS = VLEN / RLEN, COLS = RLEN / 32, NW = VLEN / 32;

  logic clk = 0, rst_n = 0;
  logic start = 0, store = 0, trans = 0, col_agn = 0, row_agn = 0, busy, done, bcast;
  logic [11:0] rows = 0, cols = 0;
  logic [63:0] base = 0, stride = 0;
  logic [NW-1:0][31:0] image;
  logic [NW-1:0] image_en;
  logic capture = 0;
  logic [7:0] cap_slot = 0;
  logic [NLANES-1:0][31:0] cap_data = '0;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [63:0] req_addr;
  logic [RLEN-1:0] req_wdata, rsp_rdata;
  logic [RLEN/8-1:0] req_be;
  int checks = 0, failures = 0, n_bcast = 0;

  mte_tile_lsu #(.VLEN(VLEN), .RLEN(RLEN), .NLANES(NLANES)) dut (.clk, .rst_n,
    .start_i(start), .store_i(store), .trans_i(trans), .rows_i(rows), .cols_i(cols),
    .base_i(base), .stride_i(stride), .col_agn_i(col_agn), .row_agn_i(row_agn),
    .busy_o(busy), .done_o(done), .bcast_o(bcast), .image_o(image), .image_en_o(image_en),
    .capture_i(capture), .capture_slot_i(cap_slot), .capture_data_i(cap_data),
    .req_valid_o(req_valid), .req_ready_i(req_ready), .req_we_o(req_we), .req_addr_o(req_addr),
    .req_wdata_o(req_wdata), .req_be_o(req_be), .rsp_valid_i(rsp_valid), .rsp_rdata_i(rsp_rdata));

  tb_mem_model #(.RLEN(RLEN), .MEM_BYTES(65536), .LAT(2), .STALLS(1'b1)) mem (.clk,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .req_be, .rsp_valid, .rsp_rdata);

  always #5 clk = ~clk;
  always @(posedge clk) if (bcast) n_bcast++;
  initial begin repeat (500000) @(posedge clk); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 65536; a += 4) mem.write32(a, $urandom);
    // ---------------- loads ----------------
    for (int t = 0; t < 60; t++) begin
      int unsigned nreq0, nb0, nmem;
      store = 0; trans = 1'($urandom); col_agn = 1'($urandom); row_agn = 1'($urandom);
      rows = 12'($urandom_range(ROWS, 1)); cols = 12'($urandom_range(COLS, 1));
      base = 64'($urandom_range(4000) * 4);
      stride = (t % 5 == 4) ? 64'd0 : 64'($urandom_range(100, 16) * 4);
      nreq0 = mem.n_req; nb0 = n_bcast;
      run();
      nmem = trans ? cols : rows;
      chk("requests", mem.n_req - nreq0, stride == 0 ? 1 : nmem);
      @(negedge clk);
      chk("broadcast event", n_bcast - nb0, stride == 0 ? 1 : 0);
      for (int unsigned w = 0; w < NW; w++) begin
        int unsigned r, c;
        logic act;
        r = w / COLS; c = w % COLS;
        act = r < rows && c < cols;
        if (act) begin
          // plain: memory row r, element c; transposed: memory row c, element r
          chk("load data", image[w], trans ? mem.read32(32'(base + c * stride + r * 4))
                                           : mem.read32(32'(base + r * stride + c * 4)));
          chk("load en", 32'(image_en[w]), 1);
        end else begin
          chk("inactive en", 32'(image_en[w]), 32'(r < rows ? col_agn : row_agn));
          if (image_en[w]) chk("agnostic zero", image[w], 0);
        end
      end
    end
    // ---------------- stores ----------------
    for (int t = 0; t < 40; t++) begin
      logic [31:0] ref_img [NW];
      logic [31:0] guard_w [16];
      int unsigned nmem;
      foreach (ref_img[w]) ref_img[w] = $urandom;
      for (int s = 0; s < NW / NLANES; s++) begin
        @(negedge clk);
        capture = 1; cap_slot = 8'(s);
        for (int l = 0; l < NLANES; l++) cap_data[l] = ref_img[s * NLANES + l];
      end
      @(negedge clk); capture = 0;
      store = 1; trans = 1'($urandom);
      rows = 12'($urandom_range(ROWS, 1)); cols = 12'($urandom_range(COLS, 1));
      base = 64'($urandom_range(4000) * 4 + 20000);
      stride = 64'($urandom_range(60, 17) * 4);
      nmem = trans ? cols : rows;
      // remember a guard word after each memory row
      for (int i = 0; i < nmem; i++) guard_w[i] = mem.read32(32'(base + i * stride + (trans ? rows : cols) * 4));
      run();
      @(negedge clk);
      for (int unsigned r = 0; r < rows; r++)
        for (int unsigned c = 0; c < cols; c++)
          chk("store data", trans ? mem.read32(32'(base + c * stride + r * 4))
                                  : mem.read32(32'(base + r * stride + c * 4)), ref_img[r * COLS + c]);
      for (int i = 0; i < nmem; i++)
        chk("store leaves other bytes", mem.read32(32'(base + i * stride + (trans ? rows : cols) * 4)), guard_w[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
