// katan_ir_lfsr -- round constant (IR) generator and round counter.
//
// Equation (1) of the cipher masks one AND term with an irregular-update bit
// IR that changes from round to round. Instead of a 254-entry table, the
// sequence is produced by an 8-bit Fibonacci LFSR
//     s[n+8] = s[n] ^ s[n+1] ^ s[n+3] ^ s[n+5]
// whose oldest bit t[0] is the IR bit of the current round. The register is
// (re)started at 8'h7F, which yields the KATAN sequence 1111111000 1101...
// The full state t is also the round-counter value T used by the KTANTAN
// subkey selection.
//
// Interface: load restarts at round 0 (priority over step); step advances one
// round. Outputs are valid in the cycle after load/step. Reset is
// asynchronous, active low, and also restarts at round 0.
// The paper names the IR table; generating it with an LFSR is this design's
// choice (it is how the cipher specification defines the sequence).
module katan_ir_lfsr (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       step,
  output logic       ir,
  output logic [7:0] t
);
  localparam logic [7:0] SEED = 8'h7F;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     t <= SEED;
    else if (load)  t <= SEED;
    else if (step)  t <= {t[0] ^ t[1] ^ t[3] ^ t[5], t[7:1]};
  end

  assign ir = t[0];
endmodule
