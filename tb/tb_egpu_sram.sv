// tb_egpu_sram: self-checking test of the SRAM wrapper.
//
// Random reads and byte-masked writes against a reference array kept in the
// testbench; a read must return the reference value one cycle after the
// request, and rdata must hold while no read is issued.
module tb_egpu_sram;
  localparam int WIDTH = 64, DEPTH = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic req = 1'b0, we = 1'b0;
  logic [3:0] addr = '0;
  logic [WIDTH/8-1:0] be = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];

  egpu_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be), .wdata_i(wdata),
    .rdata_o(rdata)
  );

  int checks = 0, failures = 0;

  initial begin
    // fill every entry
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 4'(i); be = '1; wdata = {$urandom(), $urandom()};
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      req = 1; we = ($urandom_range(1) == 1); addr = 4'($urandom_range(DEPTH - 1));
      be = 8'($urandom()); wdata = {$urandom(), $urandom()};
      if (we) begin
        for (int b = 0; b < WIDTH / 8; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [WIDTH-1:0] exp;
        exp = ref_mem[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("FAIL read %0d: got %h expected %h", addr, rdata, exp);
        end
        // rdata holds while idle
        @(negedge clk);
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL rdata did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
