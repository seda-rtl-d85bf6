// mac_hash: keyed hash producing the 64-bit MAC of one protected block,
// MAC = Hash_Kh(blk || PA || VN || layer_id || fmap_idx || blk_idx).
//
// The paper binds the location fields into the MAC (so blocks cannot be
// reordered within a layer) but does not say which hash it uses. This design
// uses CBC-MAC over AES-128 with its own key Kh: the NSEG ciphertext segments
// (segment 0 first), then the 128-bit location record, chained through one
// iterative AES engine with a zero IV; the MAC is the upper 64 bits of the
// last AES output. Every message has the same length (NSEG+1 blocks), the
// case in which plain CBC-MAC is a secure MAC.
//
// Interface: key_valid loads Kh (keys_ready 10 cycles later). in_valid/
// in_ready takes a block and its location record; out_mac/out_valid appears
// 12*(NSEG+1) cycles after the accept edge (11 cycles per AES call plus one
// to chain) and holds until out_ready. One block at a time.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module mac_hash
  import aes_pkg::*;
  import seda_pkg::*;
#(
  parameter int unsigned NSEG = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_valid,
  input  logic [127:0]          key,
  output logic                  keys_ready,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [NSEG*SEG_W-1:0] in_data,
  input  aes_block_t            in_meta,
  output logic                  out_valid,
  input  logic                  out_ready,
  output mac_t                  out_mac
);

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_WAIT, S_DONE} state_e;

  state_e                state;
  rkeys_t                rk;
  logic [NSEG*SEG_W-1:0] data_q;
  aes_block_t            meta_q;
  aes_block_t            chain;
  logic [4:0]            idx;       // next message block, 0..NSEG (NSEG = location record)
  logic                  aes_in_ready, aes_out_valid;
  state_t                aes_out;
  aes_block_t            msg_blk;

  aes_key_expansion u_kx (
    .clk, .rst_n,
    .load_valid (key_valid),
    .key        (key),
    .rk         (rk),
    .keys_ready (keys_ready)
  );

  always_comb begin
    msg_blk = meta_q;
    for (int j = 0; j < int'(NSEG); j++)
      if (idx == 5'(j)) msg_blk = data_q[j*SEG_W +: SEG_W];
  end

  aes_core u_aes (
    .clk, .rst_n,
    .rk        (rk),
    .in_valid  (state == S_FEED),
    .in_ready  (aes_in_ready),
    .in_block  (msg_blk ^ chain),
    .out_valid (aes_out_valid),
    .out_ready (state == S_WAIT),
    .out_block (aes_out)
  );

  assign in_ready  = (state == S_IDLE) && keys_ready && !key_valid;
  assign out_valid = (state == S_DONE);
  assign out_mac   = chain[127:64];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      data_q <= '0;
      meta_q <= '0;
      chain  <= '0;
      idx    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && in_ready) begin
          data_q <= in_data;
          meta_q <= in_meta;
          chain  <= '0;
          idx    <= '0;
          state  <= S_FEED;
        end
        S_FEED: if (aes_in_ready) state <= S_WAIT;
        S_WAIT: if (aes_out_valid) begin
          chain <= aes_out;
          idx   <= idx + 5'd1;
          state <= (idx == 5'(NSEG)) ? S_DONE : S_FEED;
        end
        S_DONE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
