// output_spike_mem -- output spike memory of one neuron unit.
//
// Stores the spikes the neuron macro produces: one entry per (timestep,
// Vmem row), holding one spike bit per Vmem word of that row (up to 6 words
// at 4-bit precision). The neuron controller writes an entry when the
// threshold comparison of a row completes; the host reads entries back.
// The paper names this memory but gives no size or organisation: 256 x 8 bit
// (256 B) is inferred from the chip's SRAM budget (12.7 kB without IFmems,
// minus 9.7 kB of macros and 9 x 256 B of IFspads leaves 0.75 kB for three
// neuron units). Address = {timestep mod 8, row}; 8 timesteps fit before the
// host must drain it. Timing: synchronous write, one-cycle synchronous read.
module output_spike_mem #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 8,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
