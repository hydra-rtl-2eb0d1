// weight_buffer: the weight and bias banks, one bank per FMA.
//
// Bank j holds every weight neuron j uses, layer after layer: layer l's
// weights occupy addresses base(l) .. base(l)+n_in(l)-1, where base(l) is the
// sum of the input counts of the earlier layers (324 words per bank for
// 196:64:32:32:10). Bank j also holds one bias per layer. All banks are read
// at one common address, so kernel[j] is the weight FMA j needs for the
// input word being broadcast; the bias of every bank is read at layer
// b_rd_layer. Reads are combinational (distributed memory, no block RAM).
// The host writes one word per cycle: w_we writes a weight at (wr_bank,
// wr_addr), b_we a bias at (wr_bank, layer wr_addr). Contents are not reset.
//
// Following the paper: one weight bank per FMA feeding kernel0..kernel#, no
// block RAM. This design's own choices: the memory map and the host port.
module weight_buffer #(
  parameter int unsigned DW         = hydra_pkg::DEF_DW,
  parameter int unsigned NBANK      = hydra_pkg::DEF_MAX_FMA,
  parameter int unsigned WDEPTH     = hydra_pkg::DEF_WDEPTH,
  parameter int unsigned MAX_LAYERS = hydra_pkg::DEF_MAX_LAYERS,
  localparam int unsigned BW = $clog2(NBANK),
  localparam int unsigned AW = $clog2(WDEPTH),
  localparam int unsigned LW = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1
) (
  input  logic                 clk,
  input  logic                 w_we,
  input  logic                 b_we,
  input  logic [BW-1:0]        wr_bank,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [DW-1:0] wr_data,
  input  logic [AW-1:0]        rd_addr,
  input  logic [LW-1:0]        b_rd_layer,
  output logic signed [DW-1:0] kernel [NBANK],
  output logic signed [DW-1:0] bias   [NBANK]
);
  logic signed [DW-1:0] wmem [NBANK][WDEPTH];
  logic signed [DW-1:0] bmem [NBANK][MAX_LAYERS];

  always_ff @(posedge clk) begin
    if (w_we && 32'(wr_addr) < WDEPTH && 32'(wr_bank) < NBANK)
      wmem[wr_bank][wr_addr] <= wr_data;
    if (b_we && 32'(wr_addr) < MAX_LAYERS && 32'(wr_bank) < NBANK)
      bmem[wr_bank][LW'(wr_addr)] <= wr_data;
  end

  // An address past the end reads 0 (the weight prefetch runs one ahead).
  always_comb begin
    for (int j = 0; j < NBANK; j++) begin
      kernel[j] = (32'(rd_addr) < WDEPTH) ? wmem[j][rd_addr] : '0;
      bias[j]   = (32'(b_rd_layer) < MAX_LAYERS) ? bmem[j][b_rd_layer] : '0;
    end
  end
endmodule
