// shift_table: per-layer store of the bit-shift configuration.
//
// Besides the integer tensors, a jointly quantized network needs only a few
// small numbers per layer: the shift amounts that align biases and
// shortcuts and that requantize the output (never the fractional bits
// themselves), plus the module type, the output width and whether the layer's
// inputs are unsigned. This table holds one jq_cfg_t word per layer, written
// once by the host before inference and read by the unit at the start of
// every operation.
//
// Interface: one write port (wr_en_i, wr_addr_i, wr_data_i), written on the
// rising clock edge; one asynchronous read port (rd_addr_i -> rd_data_o), so
// the unit can take the configuration in the same clock as start_i.
// Timing: a write is visible to reads from the next clock on.
//
// From the paper: the bit-shift values are stored in the hardware next to
// the integer data, one set per layer. This design's own choices: the depth
// of 256 layers (enough for the 156 weight layers of ResNet-152), storing
// the whole configuration word rather than the shifts alone, the
// asynchronous read, and no reset (the host must write a layer before using
// it).
module shift_table
  import jq_pkg::*;
#(
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en_i,
  input  logic [ADDR_W-1:0] wr_addr_i,
  input  jq_cfg_t           wr_data_i,
  input  logic [ADDR_W-1:0] rd_addr_i,
  output jq_cfg_t           rd_data_o
);

  jq_cfg_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
  end

  assign rd_data_o = mem[rd_addr_i];

endmodule
