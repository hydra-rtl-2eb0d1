// piso: parallel-in serial-out register between the FMA array and the single
// activation unit.
//
// load captures all N FMA outputs in one cycle and sets count to n_load, the
// number of words the current layer actually produces. Each shift cycle
// moves the words one place toward entry 0 and decrements count; sout is
// always entry 0, so word 0 (FMA0) leaves first, one word per cycle. count
// reaching 0 ends the PISO phase of the layer sequencer. load has priority
// over shift. Reset is synchronous and active high.
//
// Following the paper: one PISO funnels the N parallel FMA results into one
// activation unit. This design's own choices: the FMA0-first order and the
// count output.
module piso #(
  parameter int unsigned DW = hydra_pkg::DEF_DW,
  parameter int unsigned N  = hydra_pkg::DEF_MAX_FMA,
  localparam int unsigned CW = $clog2(N+1)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 load,
  input  logic [CW-1:0]        n_load,
  input  logic                 shift,
  input  logic signed [DW-1:0] pin [N],
  output logic signed [DW-1:0] sout,
  output logic [CW-1:0]        count
);
  logic signed [DW-1:0] sr [N];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) sr[i] <= '0;
      count <= '0;
    end else if (load) begin
      sr    <= pin;
      count <= n_load;
    end else if (shift && count != 0) begin
      for (int i = 0; i < N-1; i++) sr[i] <= sr[i+1];
      sr[N-1] <= '0;
      count   <= count - 1'b1;
    end
  end

  assign sout = sr[0];
endmodule
