// kid_coef_ram: simple dual-port coefficient memory (one of Mem_A / Mem_B).
//
// One write port and one read port, both synchronous to clk, as in a block
// RAM in simple dual-port mode. A word is 24 bits: two Kyber coefficients
// {odd, even} or one Dilithium coefficient in bits [22:0]. Depth 256 holds
// half of two Dilithium polynomials (addresses {poly, offset[6:0]}); Kyber
// uses offsets 0..63 of each half. Read data appears one cycle after rd_en.
// A read and a write to the same address in one cycle return the old word;
// the controller's schedule never does this during a transform.
module kid_coef_ram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 24,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             re_i,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end
endmodule
