// integ_engine: SeDA's integrity verification engine (Integ Engine).
//
// Takes one ciphertext block at a time together with its location record,
// direction and verification level, computes its MAC with mac_hash and hands
// the MAC to mac_verifier, which aggregates it at optBlk, layer or model
// level. For an optBlk-level write the MAC is also offered on mac_out so that
// the memory side can store it next to the block; for an optBlk-level read the
// MAC fetched from memory comes in with the job (job_expected).
//
// Interface: key_valid loads Kh. job_valid/job_ready takes a job; the engine
// holds its attributes until the MAC has been delivered, about 12*(NSEG+1)
// cycles. Verifier commands (cmd_*) are only accepted when no job is in
// flight, so a layer or model check always sees every MAC issued before it.
// The job bookkeeping and that ordering rule are this design's choices.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module integ_engine
  import seda_pkg::*;
#(
  parameter int unsigned NSEG       = 4,
  parameter int unsigned NUM_LAYERS = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_valid,
  input  logic [127:0]          key,
  output logic                  keys_ready,
  // jobs
  input  logic                  job_valid,
  output logic                  job_ready,
  input  op_e                   job_op,
  input  mac_level_e            job_level,
  input  blk_meta_t             job_meta,
  input  logic [NSEG*SEG_W-1:0] job_data,
  input  mac_t                  job_expected,
  // MAC of an optBlk-level write, to be stored off-chip
  output logic                  mac_out_valid,
  input  logic                  mac_out_ready,
  output logic [PA_W-1:0]       mac_out_pa,
  output mac_t                  mac_out,
  // verification
  output logic                  blk_chk_valid,
  output logic                  blk_chk_ok,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  vcmd_e                 cmd,
  input  logic [LAYER_W-1:0]    cmd_layer,
  input  mac_t                  cmd_value,
  output logic                  res_valid,
  output logic                  res_ok,
  output logic                  integrity_error,
  output mac_t                  model_mac
);

  logic        held;                 // a job is being hashed
  op_e         op_q;
  mac_level_e  level_q;
  logic [PA_W-1:0]    pa_q;
  logic [LAYER_W-1:0] layer_q;
  mac_t        expected_q;

  logic        h_in_ready, h_out_valid, h_out_ready;
  mac_t        h_mac;
  logic        v_mac_ready, v_cmd_ready;
  logic        needs_store;

  assign job_ready   = h_in_ready && !held;
  assign needs_store = (op_q == OP_WRITE) && (level_q == LVL_OPTBLK);
  assign h_out_ready = v_mac_ready && (!needs_store || mac_out_ready);

  mac_hash #(.NSEG(NSEG)) u_hash (
    .clk, .rst_n,
    .key_valid, .key, .keys_ready,
    .in_valid  (job_valid && job_ready),
    .in_ready  (h_in_ready),
    .in_data   (job_data),
    .in_meta   (meta_block(job_meta)),
    .out_valid (h_out_valid),
    .out_ready (h_out_ready),
    .out_mac   (h_mac)
  );

  assign mac_out_valid = h_out_valid && needs_store && v_mac_ready;
  assign mac_out       = h_mac;
  assign mac_out_pa    = pa_q;

  mac_verifier #(.NUM_LAYERS(NUM_LAYERS)) u_ver (
    .clk, .rst_n,
    .mac_valid     (h_out_valid && (!needs_store || mac_out_ready)),
    .mac_ready     (v_mac_ready),
    .mac_op        (op_q),
    .mac_level     (level_q),
    .mac_layer     (layer_q),
    .mac_value     (h_mac),
    .mac_expected  (expected_q),
    .blk_chk_valid, .blk_chk_ok,
    .cmd_valid     (cmd_valid && !held),
    .cmd_ready     (v_cmd_ready),
    .cmd, .cmd_layer, .cmd_value,
    .res_valid, .res_ok, .integrity_error, .model_mac
  );

  assign cmd_ready = v_cmd_ready && !held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held       <= 1'b0;
      op_q       <= OP_READ;
      level_q    <= LVL_OPTBLK;
      pa_q       <= '0;
      layer_q    <= '0;
      expected_q <= '0;
    end else begin
      if (job_valid && job_ready) begin
        held       <= 1'b1;
        op_q       <= job_op;
        level_q    <= job_level;
        pa_q       <= job_meta.pa;
        layer_q    <= job_meta.layer_id;
        expected_q <= job_expected;
      end else if (h_out_valid && h_out_ready) begin
        held <= 1'b0;
      end
    end
  end

endmodule
