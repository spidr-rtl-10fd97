// ifmem -- input spike memory (IFmem) of one compute unit.
//
// Holds the layer's input spikes in raw, uncompressed form: ROWS words of
// WIDTH spikes (640 x 56 = 4.375 kB, as on the chip). A host write port loads
// the spikes before a layer runs; the input loader reads one word per cycle.
// Timing: synchronous write; synchronous read with one cycle of latency
// (rd_data is valid the cycle after rd_en). The row organisation (one row of
// one channel per word, timesteps stacked) is this design's choice; the paper
// gives only the size.
module ifmem #(
  parameter int ROWS  = 640,
  parameter int WIDTH = 56,
  localparam int AW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
