// offchip_mem_model: behavioural model of the untrusted off-chip memory
// (not synthesizable, testbench only).
//
// Stores ciphertext blocks and optBlk MACs by address in associative arrays.
// A write is taken at once; a read answers LAT cycles after the request with
// the block and the MAC stored at that address (zero for unwritten places).
// The tasks flip_bit, swap_blocks, snapshot and replay let a testbench play
// the attacker who controls this memory.
module offchip_mem_model #(
  parameter int unsigned BLK_W = 512,
  parameter int unsigned AW    = 34,
  parameter int unsigned LAT   = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [AW-1:0]    req_addr,
  input  logic [BLK_W-1:0] req_wdata,
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output logic [BLK_W-1:0] rsp_rdata,
  output logic [63:0]      rsp_rmac,
  input  logic             mac_wr_valid,
  output logic             mac_wr_ready,
  input  logic [AW-1:0]    mac_wr_addr,
  input  logic [63:0]      mac_wr_data
);
  logic [BLK_W-1:0] data [logic [AW-1:0]];
  logic [63:0]      macs [logic [AW-1:0]];
  logic [BLK_W-1:0] saved_data;
  logic [63:0]      saved_mac;

  int unsigned      wait_cnt;
  logic             busy;
  logic [AW-1:0]    rd_addr;
  int unsigned      n_writes = 0, n_reads = 0;

  assign req_ready    = rst_n && !busy && !rsp_valid;
  assign mac_wr_ready = 1'b1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      rsp_valid <= 1'b0;
      wait_cnt  <= 0;
      rd_addr   <= '0;
      rsp_rdata <= '0;
      rsp_rmac  <= '0;
    end else begin
      if (req_valid && req_ready) begin
        if (req_we) begin
          data[req_addr] = req_wdata;
          n_writes <= n_writes + 1;
        end else begin
          busy     <= 1'b1;
          rd_addr  <= req_addr;
          wait_cnt <= LAT - 1;
          n_reads  <= n_reads + 1;
        end
      end
      if (busy) begin
        if (wait_cnt == 0) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_rdata <= data.exists(rd_addr) ? data[rd_addr] : '0;
          rsp_rmac  <= macs.exists(rd_addr) ? macs[rd_addr] : '0;
        end else wait_cnt <= wait_cnt - 1;
      end
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (mac_wr_valid) macs[mac_wr_addr] = mac_wr_data;
    end
  end

  task automatic flip_bit(input logic [AW-1:0] a, input int bitpos);
    data[a][bitpos] = ~data[a][bitpos];
  endtask

  task automatic swap_blocks(input logic [AW-1:0] a, input logic [AW-1:0] b);
    logic [BLK_W-1:0] t;
    logic [63:0] m;
    t = data[a]; data[a] = data[b]; data[b] = t;
    if (macs.exists(a) && macs.exists(b)) begin
      m = macs[a]; macs[a] = macs[b]; macs[b] = m;
    end
  endtask

  task automatic snapshot(input logic [AW-1:0] a);
    saved_data = data[a];
    saved_mac  = macs.exists(a) ? macs[a] : '0;
  endtask

  task automatic replay(input logic [AW-1:0] a);
    data[a] = saved_data;
    macs[a] = saved_mac;
  endtask

  function automatic logic [BLK_W-1:0] peek(input logic [AW-1:0] a);
    return data[a];
  endfunction

  function automatic logic [63:0] peek_mac(input logic [AW-1:0] a);
    return macs.exists(a) ? macs[a] : '0;
  endfunction
endmodule
