// dg_noise_fetch: noise supply controller of the DataGuard noising module.
//
// Noise samples are drawn by the trusted host software and written to a
// protected region of device memory whose base is the noise-br register.
// One quarter of the on-chip buffers (6 MB, CHUNK_VECS vectors of 512
// bytes) is set aside for noise. When an add-noise needs noise and the
// partition is empty, this controller asks the accelerator's DMA for a
// batched transfer of the next chunk of the noise region into the
// partition, then hands out the vectors in order, one per add-noise, so no
// noise vector is ever used twice. When the last vector of the chunk has
// been taken the partition is empty again and the next add-noise triggers
// the transfer of the following chunk. Writing noise-br restarts at the
// first chunk.
//
// Interface: want = an add-noise is waiting; avail = rd_idx names a loaded,
// unused vector of the partition; take (only with avail) consumes it.
// xfer_valid/xfer_ready is the request handshake (source address and byte
// count), xfer_done pulses when the data is in the partition. While a
// transfer is in flight avail is 0 and add-noise stalls.
//
// From the paper: noise-br, the quarter-of-buffers partition, the 6 MB
// batched transfer started by the first add-noise. This design's choice:
// moving on to the following chunk after 6 MB are used, and the stall.
module dg_noise_fetch
  import dg_pkg::*;
#(
  parameter int unsigned CHUNK_VECS = 12288,   // 6 MB / 512 B
  parameter int unsigned VEC_BYTES  = 512,
  parameter int unsigned ADDR_W     = 35,      // 32 GB device memory
  localparam int unsigned IDX_W     = (CHUNK_VECS > 1) ? $clog2(CHUNK_VECS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              noise_br_we,
  input  logic [ADDR_W-1:0] noise_br_wdata,
  output logic [ADDR_W-1:0] noise_br,
  input  logic              want,
  input  logic              take,
  output logic              avail,
  output logic [IDX_W-1:0]  rd_idx,
  output logic              xfer_valid,
  input  logic              xfer_ready,
  output logic [ADDR_W-1:0] xfer_src,
  output logic [31:0]       xfer_bytes,
  input  logic              xfer_done
);

  localparam logic [ADDR_W-1:0] CHUNK_BYTES = ADDR_W'(CHUNK_VECS * VEC_BYTES);

  typedef enum logic [1:0] {N_EMPTY, N_REQ, N_WAIT, N_READY} nstate_e;

  nstate_e           state;
  logic [ADDR_W-1:0] chunk_base;   // device address of the next chunk

  assign avail      = (state == N_READY);
  assign xfer_valid = (state == N_REQ);
  assign xfer_src   = chunk_base;
  assign xfer_bytes = 32'(CHUNK_VECS * VEC_BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= N_EMPTY;
      noise_br   <= '0;
      chunk_base <= '0;
      rd_idx     <= '0;
    end else if (noise_br_we) begin
      noise_br   <= noise_br_wdata;
      chunk_base <= noise_br_wdata;
      state      <= N_EMPTY;
      rd_idx     <= '0;
    end else begin
      unique case (state)
        N_EMPTY: if (want) state <= N_REQ;
        N_REQ:   if (xfer_ready) state <= N_WAIT;
        N_WAIT:  if (xfer_done) begin
          state      <= N_READY;
          rd_idx     <= '0;
          chunk_base <= chunk_base + CHUNK_BYTES;
        end
        N_READY: if (take) begin
          if (rd_idx == IDX_W'(CHUNK_VECS - 1)) state <= N_EMPTY;
          rd_idx <= rd_idx + 1'b1;
        end
        default: state <= N_EMPTY;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) take |-> avail)
    else $error("noise vector taken while none is loaded");

endmodule
