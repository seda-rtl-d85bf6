// mac_verifier: SeDA's multi-level integrity verification (optBlk, layer and
// model MAC).
//
// Every block MAC produced by the hash unit arrives here with the block's
// direction, its verification level and its layer:
//   optBlk level: the MAC of a written block is stored off-chip by the caller;
//     on a read the MAC fetched with the block is compared right away
//     (blk_chk_valid / blk_chk_ok).
//   layer level: MACs are XORed into an on-chip table indexed by layer_id, one
//     table for the blocks written (wr_mem) and one for the blocks read back
//     (rd_mem). VCMD_VERIFY_LAYER compares the two entries of a layer, reports
//     the result and zeroes both, freeing the entry for the layer's next use.
//   model level: read MACs are XORed into one register (model_rd) that
//     VCMD_VERIFY_MODEL compares with a trusted reference, model_ref. The
//     reference is either loaded with VCMD_SET_MODEL or built by XORing the
//     MACs of model-level writes. The read-side register is then cleared for
//     the next inference.
// Because each MAC covers the block's PA, VN and location, a permutation of
// blocks changes the XOR sums even though XOR itself is order-blind.
// Any failed comparison sets the sticky integrity_error output; VCMD_CLEAR
// clears every table, register and the flag.
//
// The XOR aggregation, the three levels and on-chip storage of layer and
// model MACs follow the paper. The write/read pair of tables, the command set
// and freeing on verify are this design's choices. The tables are arrays
// with an asynchronous read port and one write port each. After reset (and on
// VCMD_CLEAR) a sweep zeroes them, one entry per cycle for NUM_LAYERS cycles,
// during which mac_ready and cmd_ready are low.
//
// Timing: one MAC or one command per cycle; MACs take priority over commands;
// results are registered and pulse for one cycle after the handshake.
//
// Lint note: Verilator reports rst_n as used both synchronously and
// asynchronously. The synchronous use is only the disable-iff clause of the
// handshake assertions (here or in a submodule); every flop resets
// asynchronously.
module mac_verifier
  import seda_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 256,
  localparam int unsigned LW = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // block MACs
  input  logic                mac_valid,
  output logic                mac_ready,
  input  op_e                 mac_op,
  input  mac_level_e          mac_level,
  input  logic [LAYER_W-1:0]  mac_layer,
  input  mac_t                mac_value,
  input  mac_t                mac_expected,  // off-chip MAC, optBlk-level reads
  output logic                blk_chk_valid,
  output logic                blk_chk_ok,
  // commands
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  vcmd_e               cmd,
  input  logic [LAYER_W-1:0]  cmd_layer,
  input  mac_t                cmd_value,
  output logic                res_valid,
  output logic                res_ok,
  output logic                integrity_error,
  output mac_t                model_mac       // current model reference
);

  mac_t wr_mem [NUM_LAYERS];
  mac_t rd_mem [NUM_LAYERS];
  mac_t model_ref, model_rd;

  logic          clearing;
  logic [LW-1:0] clr_idx;

  logic          mac_fire, cmd_fire;
  logic [LW-1:0] mac_addr, cmd_addr;

  logic          wr_we, rd_we;
  logic [LW-1:0] wr_waddr, rd_waddr;
  mac_t          wr_wdata, rd_wdata;

  assign mac_ready = !clearing;
  assign cmd_ready = !clearing && !mac_valid;
  assign mac_fire  = mac_valid && mac_ready;
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign mac_addr  = LW'(mac_layer);
  assign cmd_addr  = LW'(cmd_layer);
  assign model_mac = model_ref;

  // Table write ports.
  always_comb begin
    wr_we = 1'b0; wr_waddr = mac_addr; wr_wdata = '0;
    rd_we = 1'b0; rd_waddr = mac_addr; rd_wdata = '0;
    if (clearing) begin
      wr_we = 1'b1; wr_waddr = clr_idx;
      rd_we = 1'b1; rd_waddr = clr_idx;
    end else if (mac_fire) begin
      if (mac_level == LVL_LAYER) begin
        if (mac_op == OP_WRITE) begin
          wr_we = 1'b1; wr_wdata = wr_mem[mac_addr] ^ mac_value;
        end else begin
          rd_we = 1'b1; rd_wdata = rd_mem[mac_addr] ^ mac_value;
        end
      end
    end else if (cmd_fire && cmd == VCMD_VERIFY_LAYER) begin
      wr_we = 1'b1; wr_waddr = cmd_addr;
      rd_we = 1'b1; rd_waddr = cmd_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_we) wr_mem[wr_waddr] <= wr_wdata;
    if (rd_we) rd_mem[rd_waddr] <= rd_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing        <= 1'b1;
      clr_idx         <= '0;
      model_ref       <= '0;
      model_rd        <= '0;
      blk_chk_valid   <= 1'b0;
      blk_chk_ok      <= 1'b0;
      res_valid       <= 1'b0;
      res_ok          <= 1'b0;
      integrity_error <= 1'b0;
    end else begin
      blk_chk_valid <= 1'b0;
      res_valid     <= 1'b0;
      if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == LW'(NUM_LAYERS - 1)) clearing <= 1'b0;
      end else if (mac_fire) begin
        unique case (mac_level)
          LVL_OPTBLK: if (mac_op == OP_READ) begin
            blk_chk_valid <= 1'b1;
            blk_chk_ok    <= (mac_value == mac_expected);
            if (mac_value != mac_expected) integrity_error <= 1'b1;
          end
          LVL_MODEL: begin
            if (mac_op == OP_WRITE) model_ref <= model_ref ^ mac_value;
            else                    model_rd  <= model_rd ^ mac_value;
          end
          default: ;   // layer level: handled by the table write ports
        endcase
      end else if (cmd_fire) begin
        unique case (cmd)
          VCMD_VERIFY_LAYER: begin
            res_valid <= 1'b1;
            res_ok    <= (wr_mem[cmd_addr] == rd_mem[cmd_addr]);
            if (wr_mem[cmd_addr] != rd_mem[cmd_addr]) integrity_error <= 1'b1;
          end
          VCMD_VERIFY_MODEL: begin
            res_valid <= 1'b1;
            res_ok    <= (model_ref == model_rd);
            if (model_ref != model_rd) integrity_error <= 1'b1;
            model_rd  <= '0;
          end
          VCMD_SET_MODEL: model_ref <= cmd_value;
          VCMD_CLEAR: begin
            clearing        <= 1'b1;
            clr_idx         <= '0;
            model_ref       <= '0;
            model_rd        <= '0;
            integrity_error <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end

  // The layer id of a request must address an existing table entry.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mac_fire |-> 32'(mac_layer) < NUM_LAYERS);

endmodule
