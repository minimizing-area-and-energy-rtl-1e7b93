// sram_sp: single-port synchronous SRAM, the model of the compiled weight and
// index memory macros.
//
// One row is read or written per cycle when cs is high. A read (we = 0)
// returns the row on rdata in the next cycle; rdata keeps that value until
// the next read, which the layer uses to keep a CGS index row in place while
// the inputs of one block-row are processed. Writes do not disturb rdata.
// The macro's contents are not reset. The array is written as a plain
// register array so that synthesis can map it to a memory; the real design
// uses macros from a memory compiler, whose timing is not modelled here.
module sram_sp #(
  parameter int unsigned DEPTH = 98,
  parameter int unsigned WIDTH = 1536,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             cs,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cs && we) begin
      mem[addr] <= wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (cs && !we) begin
      rdata <= mem[addr];
    end
  end

endmodule
