// egpu_sram: single-port SRAM wrapper used for the tag and data arrays of the
// caches.
//
// The caches reach their storage only through this wrapper so that a
// production SRAM macro can be swapped in without touching cache logic, which is
// how the e-GPU instantiates macros for its cache banks. Here the storage is a
// plain array, so the wrapper synthesizes to memory cells and simulates as is.
//
// Interface: one port. With req high, a write (we high) stores the bytes of
// wdata selected by be at addr; a read returns mem[addr] on rdata one cycle later
// (synchronous read, as a macro does). rdata holds its value until the next read.
// The contents are not reset (as in a macro); the caches reset their valid bits
// instead.
module egpu_sram #(
  parameter int unsigned WIDTH = 32,   // bits, multiple of 8
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk_i,
  input  logic               req_i,
  input  logic               we_i,
  input  logic [AW-1:0]      addr_i,
  input  logic [WIDTH/8-1:0] be_i,
  input  logic [WIDTH-1:0]   wdata_i,
  output logic [WIDTH-1:0]   rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < WIDTH/8; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
