// dg_mtu: memory tagging unit (MTU).
//
// Moves tags between the on-chip tag buffer and the protected tag region
// of device memory alongside the accelerator's block transfers. Device
// memory holds one tag byte per 512-byte block, at tag-br + (byte address
// >> 9). For each of the nblk blocks of a command:
//   MTU_LOAD        : ordinary load; the on-chip tag is set to 0 without a
//                     memory access, so anything fetched is sensitive
//   MTU_LOAD_TAGGED : load-tagged; the tag byte is read from device memory
//                     and written to the tag buffer (used to aggregate
//                     noised gradients of several iterations with vadd)
//   MTU_STORE       : write-back; the on-chip tag is read and written to the
//                     tag byte in device memory
// The DMA moves the data itself; the MTU only follows it with the tags.
//
// Interface: cmd_valid/cmd_ready handshake, cmd_done pulses for one clock
// when all tags of a command are moved. The tag memory port issues one
// byte request at a time (mem_req_valid/ready) and takes read data on
// mem_rsp_valid. The tag buffer port has one-clock read latency. A plain
// load writes one tag per clock; tagged loads and stores are limited by
// the memory handshakes. tag-br is written by the host privacy software.
//
// From the paper: the three behaviours and the tag-br register. This
// design's choice: the address formula, byte-wide requests with one
// outstanding, and the command format.
module dg_mtu
  import dg_pkg::*;
#(
  parameter int unsigned ADDR_W = 35,
  parameter int unsigned BLK_W  = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  // tag-br register
  input  logic              tag_br_we,
  input  logic [ADDR_W-1:0] tag_br_wdata,
  output logic [ADDR_W-1:0] tag_br,
  // command from the DMA / decoder
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mtu_op_e           cmd_op,
  input  logic [ADDR_W-1:0] cmd_dev_addr,
  input  logic [BLK_W-1:0]  cmd_blk,
  input  logic [15:0]       cmd_nblk,
  output logic              cmd_done,
  // tag memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output tag_t              mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  tag_t              mem_rsp_rdata,
  // tag buffer port 1
  output logic              tb_re,
  output logic [BLK_W-1:0]  tb_ra,
  input  tag_t              tb_rd,
  output logic              tb_we,
  output logic [BLK_W-1:0]  tb_wa,
  output tag_t              tb_wd
);

  typedef enum logic [2:0] {
    M_IDLE, M_CLEAR, M_RD_REQ, M_RD_WAIT, M_TB_RD, M_TB_DATA, M_WR_REQ, M_DONE
  } mstate_e;

  mstate_e           state;
  logic [ADDR_W-1:0] taddr;     // tag byte address of the current block
  logic [BLK_W-1:0]  blk;       // current on-chip block
  logic [15:0]       left;      // blocks still to move
  tag_t              wtag;      // tag read from the tag buffer

  assign cmd_ready     = (state == M_IDLE);
  assign mem_req_valid = (state == M_RD_REQ) || (state == M_WR_REQ);
  assign mem_req_we    = (state == M_WR_REQ);
  assign mem_req_addr  = taddr;
  assign mem_req_wdata = wtag;
  assign tb_re         = (state == M_TB_RD);
  assign tb_ra         = blk;
  assign tb_we         = (state == M_CLEAR) || (state == M_RD_WAIT && mem_rsp_valid);
  assign tb_wa         = blk;
  assign tb_wd         = (state == M_CLEAR) ? '0 : mem_rsp_rdata;
  assign cmd_done      = (state == M_DONE);

  // advance to the next block or finish
  function automatic mstate_e next_or_done(input logic [15:0] l, input mstate_e nxt);
    return (l == 16'd1) ? M_DONE : nxt;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= M_IDLE;
      tag_br <= '0;
      taddr  <= '0;
      blk    <= '0;
      left   <= '0;
      wtag   <= '0;
    end else begin
      if (tag_br_we) tag_br <= tag_br_wdata;
      unique case (state)
        M_IDLE: if (cmd_valid) begin
          taddr <= tag_br + (cmd_dev_addr >> BLK_SHIFT);
          blk   <= cmd_blk;
          left  <= cmd_nblk;
          if (cmd_nblk == 16'd0) state <= M_DONE;
          else unique case (cmd_op)
            MTU_LOAD:        state <= M_CLEAR;
            MTU_LOAD_TAGGED: state <= M_RD_REQ;
            default:         state <= M_TB_RD;
          endcase
        end
        M_CLEAR: begin
          blk   <= blk + 1'b1;
          left  <= left - 16'd1;
          state <= next_or_done(left, M_CLEAR);
        end
        M_RD_REQ: if (mem_req_ready) state <= M_RD_WAIT;
        M_RD_WAIT: if (mem_rsp_valid) begin
          blk   <= blk + 1'b1;
          taddr <= taddr + 1'b1;
          left  <= left - 16'd1;
          state <= next_or_done(left, M_RD_REQ);
        end
        M_TB_RD:   state <= M_TB_DATA;
        M_TB_DATA: begin
          wtag  <= tb_rd;
          state <= M_WR_REQ;
        end
        M_WR_REQ: if (mem_req_ready) begin
          blk   <= blk + 1'b1;
          taddr <= taddr + 1'b1;
          left  <= left - 16'd1;
          state <= next_or_done(left, M_TB_RD);
        end
        M_DONE:  state <= M_IDLE;
        default: state <= M_IDLE;
      endcase
    end
  end

endmodule
