// aes_core: iterative AES-128 encryption engine, one round per clock.
//
// Structure as in the paper's AES engine diagram: an initial AddRoundKey with
// k0, nine rounds of SubBytes, ShiftRows, MixColumns and AddRoundKey with
// k1..k9, and a final round without MixColumns using k10 (n = 10 for a
// 128-bit key). Round keys come from aes_key_expansion and must stay stable
// while a block is in flight.
//
// Handshake: in_valid/in_ready accepts a block (the initial AddRoundKey is done
// on that edge); out_valid rises 10 cycles later and out_block holds until
// out_ready. A new block is accepted in the cycle the result is taken, so the
// throughput is one block per 11 cycles. Only encryption is needed: AES-CTR
// uses the cipher in the forward direction for both encryption and
// decryption. The one-round-per-clock datapath is this design's choice.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module aes_core
  import aes_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  rkeys_t  rk,
  input  logic    in_valid,
  output logic    in_ready,
  input  state_t  in_block,
  output logic    out_valid,
  input  logic    out_ready,
  output state_t  out_block
);

  state_t     st;
  logic [3:0] round;   // round being computed next, 1..10
  logic       busy;

  assign in_ready  = !busy && (!out_valid || out_ready);
  assign out_block = st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= '0;
      round     <= 4'd0;
      busy      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        st    <= in_block ^ rk[0];
        round <= 4'd1;
        busy  <= 1'b1;
      end else if (busy) begin
        st    <= aes_round(st, rk[round], round == 4'd10);
        round <= round + 4'd1;
        if (round == 4'd10) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
      end
    end
  end

  // A result must hold until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_block));

endmodule
