// tb_mem_model: behavioural memory for the testbenches (stands in for the cache hierarchy and
// main memory of the host system). Byte-addressed, MEM_BYTES bytes, addresses wrap modulo its
// size. It accepts one request per cycle when req_ready is high (ready is pulled low on random
// cycles when STALLS is set) and answers each request exactly once, in order, LAT cycles later.
// A read returns RLEN/8 bytes from the request address; a write stores the bytes whose byte
// enable is set.
// write32/read32 give the testbench direct access to the bytes (little-endian words). The
// request/response format matches the tile LSU port of this design; the paper's system uses
// caches and main memory that are not modelled.
module tb_mem_model #(
  parameter int unsigned RLEN      = 512,
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned LAT       = 2,
  parameter bit          STALLS    = 1'b0
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [63:0]       req_addr,
  input  logic [RLEN-1:0]   req_wdata,
  input  logic [RLEN/8-1:0] req_be,
  output logic              rsp_valid,
  output logic [RLEN-1:0]   rsp_rdata
);
  logic [7:0] mem [MEM_BYTES];
  logic              pv [LAT];
  logic [RLEN-1:0]   pd [LAT];
  int unsigned       n_req = 0;

  initial begin
    for (int i = 0; i < LAT; i++) pv[i] = 1'b0;
    req_ready = 1'b1;
  end

  always @(posedge clk) begin
    logic [RLEN-1:0] d;
    d = '0;
    if (req_valid && req_ready) begin
      n_req++;
      for (int unsigned b = 0; b < RLEN / 8; b++) begin
        int unsigned a;
        a = (32'(req_addr) + b) % MEM_BYTES;
        if (req_we) begin
          if (req_be[b]) mem[a] <= req_wdata[b*8 +: 8];
        end else d[b*8 +: 8] = mem[a];
      end
    end
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= req_valid && req_ready;
    pd[0] <= d;
    req_ready <= STALLS ? ($urandom_range(3) != 0) : 1'b1;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

  function automatic void write32(int unsigned addr, logic [31:0] v);
    for (int b = 0; b < 4; b++) mem[(addr + b) % MEM_BYTES] = v[b*8 +: 8];
  endfunction
  function automatic logic [31:0] read32(int unsigned addr);
    logic [31:0] v;
    for (int b = 0; b < 4; b++) v[b*8 +: 8] = mem[(addr + b) % MEM_BYTES];
    return v;
  endfunction
endmodule
