// stream_if: a stream channel with an end-of-transmission marker.
//
// A stream carries values one after another and closes with an EOT message.
// Here both travel on one valid/ready handshake: a transfer happens on a
// rising clock edge with valid and ready both high; eot = 1 marks the EOT
// message, whose data is ignored. The paper's streams use a separate EOT
// channel; merging the two into one handshake is this design's choice.
// Rule checked by assertions: once valid is raised it stays high, with data
// and eot unchanged, until the transfer takes place. The assertion is
// disabled during reset; Verilator's lint therefore reports rst_n as used both
// asynchronously (by the flip-flops of the modules on the channel) and
// synchronously (by this assertion), which is intended.
interface stream_if #(
  parameter type T = logic [63:0]
) (
  input logic clk,
  input logic rst_n
);

  logic valid;
  logic ready;
  logic eot;
  T     data;

  modport source (output valid, output eot, output data, input ready);
  modport sink   (input valid, input eot, input data, output ready);

  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      valid && !ready |=> valid && $stable(eot) && $stable(data);
  endproperty
  a_hold: assert property (p_hold) else $error("stream_if: valid/data/eot changed before transfer");

endinterface
