// ifspad -- input scratchpad (IFspad) of one compute unit.
//
// A 128 x 16 dual-port memory, as in the paper: the input loader writes
// im2col-arranged spike rows through the write port while the spike detector
// reads through the separate read port, so loading and scanning overlap.
// Row Y corresponds to weight row Y of the compute macro, column X to the
// Vmem row pair (2X, 2X+1). Timing: synchronous write; synchronous read, data
// the cycle after rd_en. A read and a write of the same row in one cycle
// return the old contents (the spike detector never reads a row that is
// still being written, see compute_unit).
module ifspad #(
  parameter int ROWS = 128,
  parameter int COLS = 16,
  localparam int AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [COLS-1:0] wr_data,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [COLS-1:0] rd_data
);
  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
