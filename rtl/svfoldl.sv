// svfoldl: left fold of single_round over a stream of subkey packs (SVFOLDL).
//
// The fold value starts as the seed (the plaintext block). Each pack that
// arrives on the stream is applied with one single_round, and the EOT message
// ends the fold, after which the accumulated block is offered as the result.
// Only one single_round exists; it is reused for every pack, which is what
// makes this the resource-saving, stream-based form of the cipher.
//
// Control: IDLE accepts a seed (seed_ready = 1); FOLD accepts packs (one per
// cycle, packs.ready = 1); DONE offers the result until res_ready. With an
// always-valid pack stream, a fold of four packs takes 1 + 4 + 1 cycles from
// seed to result, and the result sits on res with res_valid until accepted.
module svfoldl
  import kasumi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_valid,
  output logic        seed_ready,
  input  logic [63:0] seed,
  stream_if.sink      packs,
  output logic        res_valid,
  input  logic        res_ready,
  output logic [63:0] res
);

  typedef enum logic [1:0] {IDLE, FOLD, DONE} state_t;

  state_t      state;
  logic [63:0] acc, acc_next;

  single_round u_round (.in64(acc), .pack(packs.data), .out64(acc_next));

  assign seed_ready  = (state == IDLE);
  assign packs.ready = (state == FOLD);
  assign res_valid   = (state == DONE);
  assign res         = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      acc   <= '0;
    end else begin
      unique case (state)
        IDLE: if (seed_valid) begin
          acc   <= seed;
          state <= FOLD;
        end
        FOLD: if (packs.valid) begin
          if (packs.eot) state <= DONE;
          else           acc   <= acc_next;
        end
        DONE: if (res_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

endmodule
