// smem_model: behavioural model of the shared memory behind the SIMD^2 load/store path.
//
// Byte-addressed array of SIZE bytes, little-endian 32-bit words. A request is accepted when
// req && gnt; gnt is dropped at random in STALL_PCT percent of cycles to exercise stalls.
// Read data (the aligned word holding addr) returns with rvalid exactly one cycle after an
// accepted read; writes honour the byte enables. stalls counts cycles with req && !gnt.
// Not synthesizable intent: it stands in for the GPU's data cache / shared memory.
module smem_model
  import simd2_pkg::*;
#(
  parameter int unsigned SIZE      = 65536,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic        clk,
  input  smem_req_t   req,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [7:0] mem [SIZE];
  int unsigned stalls = 0;
  int unsigned reads = 0;
  int unsigned writes = 0;

  initial begin
    gnt = 1'b1; rvalid = 1'b0; rdata = '0;
    for (int i = 0; i < int'(SIZE); i++) mem[i] = 8'h00;
  end

  always @(posedge clk) begin
    int unsigned a;
    a = req.addr & ~32'd3;
    rvalid <= 1'b0;
    if (req.req && gnt) begin
      if (req.we) begin
        writes++;
        for (int b = 0; b < 4; b++) if (req.be[b]) mem[(a + b) % SIZE] <= req.wdata[8*b +: 8];
      end else begin
        reads++;
        rvalid <= 1'b1;
        rdata  <= {mem[(a+3) % SIZE], mem[(a+2) % SIZE], mem[(a+1) % SIZE], mem[a % SIZE]};
      end
    end
    if (req.req && !gnt) stalls++;
    gnt <= ($urandom_range(99) >= STALL_PCT);
  end

  // Helpers for testbenches.
  function automatic void put16(input int unsigned addr, input logic [15:0] v);
    mem[addr] = v[7:0]; mem[addr+1] = v[15:8];
  endfunction
  function automatic void put32(input int unsigned addr, input logic [31:0] v);
    for (int b = 0; b < 4; b++) mem[addr+b] = v[8*b +: 8];
  endfunction
  function automatic logic [31:0] get32(input int unsigned addr);
    return {mem[addr+3], mem[addr+2], mem[addr+1], mem[addr]};
  endfunction
endmodule
