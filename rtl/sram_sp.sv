// sram_sp: single-port memory, one read or write per cycle.
//
// Stands for the single-port SRAM macros (1Kx16, 256x16) of the input/weight
// buffers and the single-port register files (64x16) of the output buffers.
// Written as an array so it simulates and synthesizes without a memory
// compiler. A write stores wdata at addr; a read (en without we) returns
// mem[addr] on rdata one clock later; rdata holds its value otherwise.
// Contents are not reset, as in a real SRAM.
module sram_sp #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
