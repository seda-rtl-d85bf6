// aes_key_expansion: iterative AES-128 key schedule with on-chip storage of
// all eleven round keys k0..k10.
//
// The round keys serve two purposes in SeDA. The AES engine uses them for its
// rounds, and the Crypt Engine XORs them onto the block's one-time pad so that
// every 128-bit segment of a data block gets its own pad. The paper says the
// keys "can be stored on-chip or generated in real-time"; this design stores
// them: load_valid captures the key as k0 and one round key is derived per
// clock, so rk[] is complete and keys_ready rises 10 cycles after the load
// edge. rk[] holds its value until the next load. A load is accepted in any
// cycle (a running expansion restarts).
//
// The iterative one-word-per-round structure (4 S-boxes) is this design's
// choice; the paper gives only the function (FIPS-197 key expansion).
module aes_key_expansion
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load_valid,   // capture key and start expanding
  input  logic [127:0] key,
  output rkeys_t       rk,           // rk[i] = round key k_i
  output logic         keys_ready    // rk[0..10] all valid
);

  localparam logic [9:0][7:0] RCON = {8'h36, 8'h1b, 8'h80, 8'h40, 8'h20,
                                      8'h10, 8'h08, 8'h04, 8'h02, 8'h01};

  logic [3:0] idx;     // next round key to derive, 1..10; 11 = done
  logic       busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rk   <= '0;
      idx  <= 4'd11;
      busy <= 1'b0;
    end else if (load_valid) begin
      rk[0] <= key;
      idx   <= 4'd1;
      busy  <= 1'b1;
    end else if (busy) begin
      rk[idx] <= next_round_key(rk[idx-1], RCON[idx-1]);
      idx     <= idx + 4'd1;
      if (idx == 4'd10) busy <= 1'b0;
    end
  end

  assign keys_ready = !busy && (idx == 4'd11) && rst_n;

endmodule
