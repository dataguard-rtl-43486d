// dg_tag_buffer: on-chip tag SRAM bank beside the result buffers.
//
// Holds one tag byte per 512-byte block of the on-chip buffers that receive
// results. It is a separate bank with its own ports, so tag traffic never
// takes a cycle from the data ports. Port 0 belongs to the tagging module:
// two synchronous reads (the two source operands of an instruction) and one
// write (the result tag). A port-0 write is forwarded to a port-0 read of
// the same block in the same cycle, so an instruction can use the tag
// written by the instruction just before it. Port 1 belongs to the memory
// tagging unit (one read, one write) for moving tags to and from device
// memory. If both ports write the same block in one cycle, port 0 wins.
//
// Timing: read data is registered and valid the clock after the read
// enable. The array is not reset, like the SRAM it models: every block that
// holds data was written by a load (tag set by the MTU), a VPU result or a
// systolic-array result (tag set by the tagging module), so a tag is always
// written before its data can be read.
//
// From the paper: 1 byte per 512 bytes, an extra bank with its own port(s),
// 32 KB per accelerator. Port arrangement and bypass are this design's
// choice.
module dg_tag_buffer
  import dg_pkg::*;
#(
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  // port 0: tagging module
  input  logic          re0,
  input  logic [AW-1:0] ra0a,
  input  logic [AW-1:0] ra0b,
  output tag_t          rd0a,
  output tag_t          rd0b,
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  tag_t          wd0,
  // port 1: memory tagging unit
  input  logic          re1,
  input  logic [AW-1:0] ra1,
  output tag_t          rd1,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  tag_t          wd1
);

  tag_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we1 && !(we0 && wa0 == wa1)) mem[wa1] <= wd1;
    if (we0) mem[wa0] <= wd0;
  end

  always_ff @(posedge clk) begin
    if (re0) begin
      rd0a <= (we0 && wa0 == ra0a) ? wd0 : mem[ra0a];
      rd0b <= (we0 && wa0 == ra0b) ? wd0 : mem[ra0b];
    end
    if (re1) rd1 <= mem[ra1];
  end

endmodule
