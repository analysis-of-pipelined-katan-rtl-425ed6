// katan_chan_if -- point-to-point channel between two pipeline stages.
//
// The stages of the pipeline exchange data the way Handel-C channels do: a
// word moves only when the sender offers it (valid) and the receiver takes it
// (ready) in the same clock cycle; nothing is buffered in the channel. The
// sender must hold valid and data steady until the transfer happens, which
// the assertion below checks in simulation.
// W is the payload width; clk and rst_n are only used by the assertion.
interface katan_chan_if #(
  parameter int unsigned W = 32
) (
  input logic clk,
  input logic rst_n
);
  logic         valid;
  logic         ready;
  logic [W-1:0] data;

  modport tx (output valid, output data, input ready);
  modport rx (input valid, input data, output ready);

  // A pending word may not be withdrawn or changed before it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (valid && !ready) |=> (valid && $stable(data));
  endproperty
  a_hold : assert property (p_hold) else $error("channel word changed before transfer");
endinterface
