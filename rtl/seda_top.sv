// seda_top: the SeDA protection unit, placed between a DNN accelerator's
// on-chip SRAM (trusted, plaintext) and untrusted off-chip memory
// (ciphertext).
//
// Every block transfer is one request carrying the block's location record
// (PA, VN, layer_id, fmap_idx, blk_idx), its direction and the level at which
// its integrity is checked.
//   Write (SRAM -> memory): the Crypt Engine encrypts the plaintext with
//     per-segment pads derived from one AES call; the ciphertext goes to
//     memory; the Integ Engine MACs the ciphertext and accumulates the MAC
//     (layer/model level) or hands it out for off-chip storage (optBlk level,
//     mac_wr_*).
//   Read (memory -> SRAM): the counter goes to the Crypt Engine together with
//     the memory read, so the pad is made while the DRAM access is in flight.
//     The returned ciphertext (and, at optBlk level, its stored MAC) is
//     decrypted to the SRAM side and MACed by the Integ Engine.
// Layer and model checks are issued on the vcmd_* port by the accelerator's
// controller when a layer's data, or the whole model, has been consumed; a
// command is accepted only between blocks and after every earlier MAC has
// been aggregated. The sticky integrity_error output reports any mismatch.
//
// The request sequencing below (one block at a time, the MAC computation
// overlapping the next block) is this design's choice. The paper defines the
// two engines and the protection unit's place in the system, not the ports.
// The VN comes with each request; the paper leaves VN management to prior
// work.
//
// Timing per block, counted in clock edges after the request handshake:
// write, the ciphertext is offered to memory after 14 edges (taken at the
// 15th if the memory is ready); read, rsp_valid rises 2 edges after the
// memory response is taken, but no earlier than 14 edges after the request,
// since the pad takes that long. The Integ Engine needs 12*(NSEG+1) cycles
// per block; a block whose MAC job finds it still busy waits in the output
// stage, which bounds the sustained rate to one block per 12*(NSEG+1)+3
// cycles or so.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module seda_top
  import seda_pkg::*;
#(
  parameter int unsigned NSEG       = 4,
  parameter int unsigned NUM_LAYERS = 256,
  localparam int unsigned BLK_W     = NSEG * SEG_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // keys, from the trusted key store
  input  logic               ke_valid,      // encryption key Ke
  input  logic [127:0]       ke,
  input  logic               kh_valid,      // hash key Kh
  input  logic [127:0]       kh,
  output logic               keys_ready,
  // accelerator / SRAM side
  input  logic               req_valid,
  output logic               req_ready,
  input  op_e                req_op,
  input  mac_level_e         req_level,
  input  blk_meta_t          req_meta,
  input  logic [BLK_W-1:0]   req_wdata,     // plaintext, writes
  output logic               rsp_valid,
  input  logic               rsp_ready,
  output blk_meta_t          rsp_meta,
  output logic [BLK_W-1:0]   rsp_rdata,     // plaintext, reads
  // off-chip memory side
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [PA_W-1:0]    mem_req_addr,
  output logic [BLK_W-1:0]   mem_req_wdata, // ciphertext
  input  logic               mem_rsp_valid,
  output logic               mem_rsp_ready,
  input  logic [BLK_W-1:0]   mem_rsp_rdata, // ciphertext
  input  mac_t               mem_rsp_rmac,  // stored optBlk MAC
  output logic               mac_wr_valid,  // optBlk MAC to store off-chip
  input  logic               mac_wr_ready,
  output logic [PA_W-1:0]    mac_wr_addr,
  output mac_t               mac_wr_data,
  // verification control and status
  input  logic               vcmd_valid,
  output logic               vcmd_ready,
  input  vcmd_e              vcmd,
  input  logic [LAYER_W-1:0] vcmd_layer,
  input  mac_t               vcmd_value,
  output logic               vres_valid,
  output logic               vres_ok,
  output logic               blk_chk_valid,
  output logic               blk_chk_ok,
  output logic               integrity_error,
  output mac_t               model_mac
);

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_MEMWAIT, S_DATA, S_CRYPT, S_OUT} state_e;

  state_e           state;
  op_e              op_q;
  mac_level_e       level_q;
  blk_meta_t        meta_q;
  logic [BLK_W-1:0] buf_q;       // plaintext (write) or ciphertext (read)
  mac_t             rmac_q;
  logic [BLK_W-1:0] res_q;       // engine output
  logic             ctr_done, mreq_done, out_done, job_done;

  logic             ce_keys_ready, ie_keys_ready;
  logic             ctr_ready, din_ready, dout_valid;
  logic [BLK_W-1:0] dout;
  logic             job_ready;
  logic             out_fire, job_fire;
  logic             ie_cmd_ready;

  assign keys_ready = ce_keys_ready && ie_keys_ready;
  assign req_ready  = (state == S_IDLE) && keys_ready;
  // A command waits until the block in flight has handed its MAC job over, so
  // it sees the MACs of all blocks requested before it.
  assign vcmd_ready = ie_cmd_ready && (state == S_IDLE);

  crypt_engine #(.NSEG(NSEG)) u_crypt (
    .clk, .rst_n,
    .key_valid  (ke_valid),
    .key        (ke),
    .keys_ready (ce_keys_ready),
    .ctr_valid  (state == S_ISSUE && !ctr_done),
    .ctr_ready  (ctr_ready),
    .ctr        (ctr_block(meta_q.pa, meta_q.vn)),
    .din_valid  (state == S_DATA),
    .din_ready  (din_ready),
    .din        (buf_q),
    .dout_valid (dout_valid),
    .dout_ready (state == S_CRYPT),
    .dout       (dout)
  );

  // Memory request: the read at S_ISSUE, the write of the ciphertext at S_OUT.
  assign mem_req_valid = (state == S_ISSUE && op_q == OP_READ && !mreq_done) ||
                         (state == S_OUT && op_q == OP_WRITE && !out_done);
  assign mem_req_we    = (op_q == OP_WRITE);
  assign mem_req_addr  = meta_q.pa;
  assign mem_req_wdata = res_q;
  assign mem_rsp_ready = (state == S_MEMWAIT);

  assign rsp_valid = (state == S_OUT && op_q == OP_READ && !out_done);
  assign rsp_rdata = res_q;
  assign rsp_meta  = meta_q;

  assign out_fire = (op_q == OP_WRITE) ? (mem_req_valid && mem_req_ready)
                                       : (rsp_valid && rsp_ready);
  assign job_fire = (state == S_OUT) && !job_done && job_ready;

  integ_engine #(.NSEG(NSEG), .NUM_LAYERS(NUM_LAYERS)) u_integ (
    .clk, .rst_n,
    .key_valid     (kh_valid),
    .key           (kh),
    .keys_ready    (ie_keys_ready),
    .job_valid     (state == S_OUT && !job_done),
    .job_ready     (job_ready),
    .job_op        (op_q),
    .job_level     (level_q),
    .job_meta      (meta_q),
    .job_data      ((op_q == OP_WRITE) ? res_q : buf_q),   // always the ciphertext
    .job_expected  (rmac_q),
    .mac_out_valid (mac_wr_valid),
    .mac_out_ready (mac_wr_ready),
    .mac_out_pa    (mac_wr_addr),
    .mac_out       (mac_wr_data),
    .blk_chk_valid, .blk_chk_ok,
    .cmd_valid     (vcmd_valid && state == S_IDLE),
    .cmd_ready     (ie_cmd_ready),
    .cmd           (vcmd),
    .cmd_layer     (vcmd_layer),
    .cmd_value     (vcmd_value),
    .res_valid     (vres_valid),
    .res_ok        (vres_ok),
    .integrity_error,
    .model_mac
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op_q      <= OP_READ;
      level_q   <= LVL_OPTBLK;
      meta_q    <= '0;
      buf_q     <= '0;
      rmac_q    <= '0;
      res_q     <= '0;
      ctr_done  <= 1'b0;
      mreq_done <= 1'b0;
      out_done  <= 1'b0;
      job_done  <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          op_q      <= req_op;
          level_q   <= req_level;
          meta_q    <= req_meta;
          buf_q     <= req_wdata;
          rmac_q    <= '0;
          ctr_done  <= 1'b0;
          mreq_done <= (req_op == OP_WRITE);
          state     <= S_ISSUE;
        end
        S_ISSUE: begin
          if (ctr_ready) ctr_done <= 1'b1;
          if (mem_req_valid && mem_req_ready) mreq_done <= 1'b1;
          if ((ctr_done || ctr_ready) &&
              (mreq_done || (mem_req_valid && mem_req_ready)))
            state <= (op_q == OP_READ) ? S_MEMWAIT : S_DATA;
        end
        S_MEMWAIT: if (mem_rsp_valid) begin
          buf_q  <= mem_rsp_rdata;
          rmac_q <= mem_rsp_rmac;
          state  <= S_DATA;
        end
        S_DATA: if (din_ready) state <= S_CRYPT;
        S_CRYPT: if (dout_valid) begin
          res_q    <= dout;
          out_done <= 1'b0;
          job_done <= 1'b0;
          state    <= S_OUT;
        end
        S_OUT: begin
          if (out_fire) out_done <= 1'b1;
          if (job_fire) job_done <= 1'b1;
          if ((out_done || out_fire) && (job_done || job_fire)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Request attributes must hold while a request waits.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
