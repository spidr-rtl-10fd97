// spike_detector -- trailing-zero spike detector of the S2A.
//
// Scans IFspad rows Y = 0 .. n_rows-1 in order and, for every set bit X of a
// row, emits the address tuple (Y, X) into the even FIFO of the address
// queue. The lowest set bit is isolated as in the published circuit:
// one-hot = data & (~data + 1); a 16-to-4 encoder turns it into X; the bit
// is then cleared with data & ~one-hot and the loop repeats while the
// remainder is non-zero. A row that reads as zero produces nothing and costs
// only its read (zero skipping).
//
// Interface: start begins a scan; the detector reads a row only once
// rows_avail (rows already written by the input loader) exceeds its index,
// so it may trail the loader. Tuples go out on a valid/ready pair
// (tup_valid && tup_ready = one push). done pulses when the last row is
// finished. Timing: one cycle to issue a row read, one to receive it; then
// one tuple per cycle while the queue accepts; a zero row costs two cycles.
module spike_detector
  import spidr_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [7:0]           n_rows,
  input  logic [7:0]           rows_avail,
  // IFspad read port
  output logic                 spad_rd_en,
  output logic [6:0]           spad_rd_addr,
  input  logic [SPAD_COLS-1:0] spad_rd_data,
  // tuple output
  output logic                 tup_valid,
  output addr_tuple_t          tup,
  input  logic                 tup_ready,
  output logic                 busy,
  output logic                 done
);
  typedef enum logic [1:0] {SD_IDLE, SD_READ, SD_WAIT, SD_EMIT} sd_state_e;
  sd_state_e state;
  logic [7:0] y;
  logic [SPAD_COLS-1:0] cur;

  logic [SPAD_COLS-1:0] onehot;
  logic [3:0] xenc;
  assign onehot = cur & (~cur + 1'b1);
  always_comb begin
    xenc = '0;
    for (int i = 0; i < SPAD_COLS; i++) if (onehot[i]) xenc = 4'(i);
  end

  assign spad_rd_en   = (state == SD_READ) && (y < rows_avail);
  assign spad_rd_addr = y[6:0];
  assign tup_valid    = (state == SD_EMIT) && (cur != '0);
  assign tup.y        = y[6:0];
  assign tup.x        = xenc;
  assign busy         = (state != SD_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SD_IDLE; y <= '0; cur <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        y <= '0;
        state <= (n_rows == 0) ? SD_IDLE : SD_READ;
        done <= (n_rows == 0);
      end else begin
        case (state)
          SD_READ: if (y < rows_avail) state <= SD_WAIT;
          SD_WAIT: begin
            if (spad_rd_data == '0) begin   // zero skipping
              if (y + 8'd1 == n_rows) begin state <= SD_IDLE; done <= 1'b1; end
              else state <= SD_READ;
              y <= y + 8'd1;
            end else begin
              cur <= spad_rd_data;
              state <= SD_EMIT;
            end
          end
          SD_EMIT: begin
            if (cur == '0 || (tup_ready && (cur & ~onehot) == '0)) begin
              if (y + 8'd1 == n_rows) begin state <= SD_IDLE; done <= 1'b1; end
              else state <= SD_READ;
              y <= y + 8'd1;
              cur <= '0;
            end else if (tup_ready) begin
              cur <= cur & ~onehot;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
