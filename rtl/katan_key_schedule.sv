// katan_key_schedule -- subkey generator (ka = k[2i], kb = k[2i+1] of round i).
//
// KATAN (KTANTAN = 0): the subkey stream is k[j] = key[j] for j < 80 and
//   k[j] = k[j-80] ^ k[j-61] ^ k[j-50] ^ k[j-13]   for j >= 80,
// the recurrence printed in the paper's flowchart. The paper expands the
// whole array k[0 .. 2*rounds-1] before the rounds start; this design keeps
// only a sliding 80-bit window (r[n] = k[2i+n]) and shifts it by two per
// round, which delivers the same two bits per round without the 508-bit array.
// KTANTAN (KTANTAN = 1): the key is loaded once and held; ka/kb come from
// ktantan_key_select, addressed by the round-counter state t.
//
// Interface: load captures key (round 0 bits valid next cycle); step moves to
// the next round. ka/kb are combinational from the register (and t).
// With KTANTAN = 0 the input t is not used; lint reports it as unused, which
// is expected since the port exists for the KTANTAN configuration.
module katan_key_schedule
  import katan_pkg::*;
#(
  parameter bit KTANTAN = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  key_t       key,
  input  logic       step,
  input  logic [7:0] t,
  output logic       ka,
  output logic       kb
);
  key_t r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              r <= '0;
    else if (load)           r <= key;
    else if (step && !KTANTAN)
      r <= {r[1] ^ r[20] ^ r[31] ^ r[68],
            r[0] ^ r[19] ^ r[30] ^ r[67],
            r[79:2]};
  end

  generate
    if (KTANTAN) begin : g_ktantan
      ktantan_key_select u_sel (.key(r), .t(t), .ka(ka), .kb(kb));
    end else begin : g_katan
      assign ka = r[0];
      assign kb = r[1];
    end
  endgenerate
endmodule
