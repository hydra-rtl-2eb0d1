// output_buffer: collects a layer's activated outputs.
//
// The activation unit delivers one word per cycle; we/wr_addr/wr_data store
// it at the neuron's index. pout presents all DEPTH entries in parallel to
// the input buffer for the next layer. After the last layer the entries
// hold the network's class scores, read one at a time through rd_addr as
// ANN_out (<8,5>, combinational read). Reset clears the entries.
//
// Following the paper: an output buffer in banks, written serially from the
// activation function, feeding the input buffer and ANN_out. This design's
// own choice: ANN_out is read by address.
module output_buffer #(
  parameter int unsigned DW    = hydra_pkg::DEF_DW,
  parameter int unsigned DEPTH = hydra_pkg::DEF_MAX_FMA,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 we,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [DW-1:0] wr_data,
  output logic signed [DW-1:0] pout [DEPTH],
  input  logic [AW-1:0]        rd_addr,
  output logic signed [DW-1:0] rd_data
);
  logic signed [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we && 32'(wr_addr) < DEPTH) begin
      mem[wr_addr] <= wr_data;
    end
  end

  assign pout    = mem;
  assign rd_data = (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
endmodule
