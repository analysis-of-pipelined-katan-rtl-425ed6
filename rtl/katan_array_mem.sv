// katan_array_mem -- array of DEPTH words of W bits.
//
// Holds the plaintext array, the key array and the ciphertext array of the
// pipeline. One synchronous write port and one combinational read port, like
// a Handel-C array built from registers (the FPGA results report no memory
// bits for the KATAN pipelines). Contents are not reset.
module katan_array_mem #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
