// input_buffer: the current layer's input vector.
//
// For the first layer the host writes the DEPTH input words (the 196 pixels
// of a 14x14 image) one per cycle through we/wr_addr/wr_data. Between layers
// xfer copies the whole output buffer (NXFER words) into entries
// 0..NXFER-1 in one cycle, so the layer just computed becomes the input of
// the next. rd_data is entry rd_addr, read combinationally; the layer
// sequencer steps rd_addr once per cycle and the word is broadcast to every
// FMA. xfer has priority over a host write. Contents are not reset.
//
// Following the paper: an input buffer in banks, fed from the output buffer
// between layers. This design's own choices: the one-cycle parallel copy and
// the host port.
module input_buffer #(
  parameter int unsigned DW    = hydra_pkg::DEF_DW,
  parameter int unsigned DEPTH = hydra_pkg::DEF_MAX_IN,
  parameter int unsigned NXFER = hydra_pkg::DEF_MAX_FMA,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [DW-1:0] wr_data,
  input  logic                 xfer,
  input  logic signed [DW-1:0] xfer_data [NXFER],
  input  logic [AW-1:0]        rd_addr,
  output logic signed [DW-1:0] rd_data
);
  logic signed [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (xfer) begin
      for (int i = 0; i < NXFER && i < DEPTH; i++) mem[i] <= xfer_data[i];
    end else if (we && 32'(wr_addr) < DEPTH) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign rd_data = (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
endmodule
