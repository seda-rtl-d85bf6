// crypt_engine: SeDA's bandwidth-aware AES-CTR encryption/decryption engine.
//
// One AES call per data block produces the shared pad OTP = AES_Ke(PA || VN).
// Segment j of the block (bits [128j+127:128j]) is then XORed with its own pad
// OTP_j = OTP ^ key_j, where key_j is a round key already held by the key
// expansion. A block of NSEG segments thus costs one AES engine and NSEG x 128
// XOR gates instead of NSEG AES engines, and no two segments share a pad
// (defence against the single-element collision attack). The same datapath
// encrypts (plaintext in) and decrypts (ciphertext in).
//
// Pad assignment (this design's choice; the paper says only "each 128-bit
// key_i in keyExpansion"): segment j < 10 uses k_{j+1} of the expansion of
// Ke. For NSEG > 10 the paper's extension is used: a second key expansion of
// Ke ^ (PA || VN) runs alongside the AES call, and segment j >= 10 uses its
// round key k_{j-9}. NSEG is therefore limited to 1..20.
//
// Interface: key_valid loads Ke (keys_ready 10 cycles later). ctr_valid/
// ctr_ready starts the pad for the next block; the AES call runs while the
// data is still on its way (e.g. during the DRAM read). din_valid/din_ready
// takes the block once the pad exists; dout is registered, so the result
// appears one cycle after the din handshake and holds until dout_ready.
// Latency from ctr handshake to din_ready: 11 cycles. One block per 11
// cycles, NSEG*16 bytes per block.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module crypt_engine
  import aes_pkg::*;
  import seda_pkg::*;
#(
  parameter int unsigned NSEG = 4   // 128-bit segments per block (64 B)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_valid,
  input  logic [127:0]          key,
  output logic                  keys_ready,
  input  logic                  ctr_valid,
  output logic                  ctr_ready,
  input  aes_block_t            ctr,
  input  logic                  din_valid,
  output logic                  din_ready,
  input  logic [NSEG*SEG_W-1:0] din,
  output logic                  dout_valid,
  input  logic                  dout_ready,
  output logic [NSEG*SEG_W-1:0] dout
);

  if (NSEG < 1 || NSEG > 20) begin : g_bad_nseg
    $error("crypt_engine: NSEG must be in 1..20");
  end

  rkeys_t     rk;          // expansion of Ke
  rkeys_t     rk_ext;      // expansion of Ke ^ (PA||VN), used when NSEG > 10
  logic       kx_ready;
  logic       ext_ready;

  logic       aes_in_ready, aes_out_valid;
  state_t     aes_out;
  logic       pending;     // a pad is being made or waits for its data
  logic       otp_valid;
  state_t     otp;
  logic [NSEG*SEG_W-1:0] pads;

  aes_key_expansion u_kx (
    .clk, .rst_n,
    .load_valid (key_valid),
    .key        (key),
    .rk         (rk),
    .keys_ready (kx_ready)
  );

  if (NSEG > 10) begin : g_ext
    aes_key_expansion u_kx_ext (
      .clk, .rst_n,
      .load_valid (ctr_valid && ctr_ready),
      .key        (rk[0] ^ ctr),
      .rk         (rk_ext),
      .keys_ready (ext_ready)
    );
  end else begin : g_no_ext
    assign rk_ext    = '0;
    assign ext_ready = 1'b1;
  end

  aes_core u_aes (
    .clk, .rst_n,
    .rk        (rk),
    .in_valid  (ctr_valid && ctr_ready),
    .in_ready  (aes_in_ready),
    .in_block  (ctr),
    .out_valid (aes_out_valid),
    .out_ready (!otp_valid),
    .out_block (aes_out)
  );

  assign keys_ready = kx_ready;
  assign ctr_ready  = kx_ready && aes_in_ready && !pending && !key_valid;

  always_comb begin
    for (int j = 0; j < int'(NSEG); j++) begin
      if (j < 10) pads[j*SEG_W +: SEG_W] = otp ^ rk[j+1];
      else        pads[j*SEG_W +: SEG_W] = otp ^ rk_ext[j-9];
    end
  end

  assign din_ready = otp_valid && ext_ready && (!dout_valid || dout_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending    <= 1'b0;
      otp_valid  <= 1'b0;
      otp        <= '0;
      dout_valid <= 1'b0;
      dout       <= '0;
    end else begin
      if (ctr_valid && ctr_ready) pending <= 1'b1;
      if (aes_out_valid && !otp_valid) begin
        otp       <= aes_out;
        otp_valid <= 1'b1;
      end
      if (dout_valid && dout_ready) dout_valid <= 1'b0;
      if (din_valid && din_ready) begin
        dout       <= din ^ pads;
        dout_valid <= 1'b1;
        otp_valid  <= 1'b0;
        pending    <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   dout_valid && !dout_ready |=> dout_valid && $stable(dout));

endmodule
