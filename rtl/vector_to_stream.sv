// vector_to_stream: produces the elements of a vector as a stream (PRD of a
// vector onto a stream channel), followed by the EOT message.
//
// A pulse on load while busy is low starts a stream: elements vec[0] ..
// vec[N-1] are offered in order, one per transfer, then an EOT message. busy
// is high from the cycle after load until the EOT transfer. vec is read while
// the stream runs, so the caller keeps it stable while busy is high (in the
// cipher it is the key schedule's output of a registered key). With a sink
// that is always ready the stream takes N+1 cycles.
module vector_to_stream #(
  parameter type         T = kasumi_pkg::pack_t,
  parameter int unsigned N = kasumi_pkg::NUM_PACKS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  T     vec [N],
  output logic busy,
  stream_if.source out
);

  localparam int unsigned IW = $clog2(N + 1);

  logic [IW-1:0] idx;
  logic          last;

  assign last      = (idx == IW'(N));
  assign out.valid = busy;
  assign out.eot   = last;
  assign out.data  = last ? T'('0) : vec[idx[$clog2(N)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (!busy) begin
      if (load) begin
        busy <= 1'b1;
        idx  <= '0;
      end
    end else if (out.ready) begin
      if (last) busy <= 1'b0;
      else      idx  <= idx + 1'b1;
    end
  end

endmodule
