// cell_scanner: the "Scan Cells" stage for one 8x8 layer of pulsing cells.
//
// The layer is read as a raster: one row-select line is driven at a time and
// the column read lines return the output level of every cell in that row.
// Rows are visited in turn, SCAN_DWELL clock cycles each, and the column
// lines are sampled in the last cycle of the dwell. At 50 MHz and the
// defaults a full layer scan takes 16 cycles (320 ns), thousands of times
// faster than the kHz pulse rates of the cells, as the paper requires.
//
// A cell's pulse is normally seen on several consecutive scans. Only the scan
// on which the cell's level goes from low to high registers a pulse, so each
// pulse is counted once ("exclude conflicts" in the paper's flow chart; this
// reading of it is this design's own). Detected pulses collect in a live
// register indexed by source cell (row * COLS + column). When period_start is
// high, the live register, including a pulse found in that same cycle, is
// copied to `fired` ("latch register for output") and cleared, so `fired`
// holds the sources that pulsed during the previous period for the whole
// next period.
//
// Interface: row_sel is one-hot, driven from a register; col_in is sampled
// synchronously. pulse_seen pulses for one cycle for each registered pulse
// (at least one cell), for monitoring.
module cell_scanner #(
  parameter int ROWS       = retina_pkg::ROWS,
  parameter int COLS       = retina_pkg::COLS,
  parameter int SCAN_DWELL = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 period_start,
  output logic [ROWS-1:0]      row_sel,
  input  logic [COLS-1:0]      col_in,
  output logic [ROWS*COLS-1:0] fired,
  output logic                 pulse_seen
);
  localparam int NC = ROWS * COLS;
  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int DW = (SCAN_DWELL > 1) ? $clog2(SCAN_DWELL) : 1;

  logic [RW-1:0] row;
  logic [DW-1:0] dwell;
  logic [NC-1:0] level_q;   // last sampled level of every cell
  logic [NC-1:0] live;      // pulses seen so far in this period
  logic [NC-1:0] rise;      // pulses found in this cycle
  logic          sample;

  assign sample = (int'(dwell) == SCAN_DWELL - 1);

  always_comb begin
    rise = '0;
    if (sample)
      for (int c = 0; c < COLS; c++)
        rise[int'(row) * COLS + c] = col_in[c] & ~level_q[int'(row) * COLS + c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row        <= '0;
      dwell      <= '0;
      level_q    <= '0;
      live       <= '0;
      fired      <= '0;
      pulse_seen <= 1'b0;
    end else begin
      pulse_seen <= |rise;
      if (sample) begin
        dwell <= '0;
        row   <= (int'(row) == ROWS - 1) ? '0 : row + 1'b1;
        for (int c = 0; c < COLS; c++)
          level_q[int'(row) * COLS + c] <= col_in[c];
      end else begin
        dwell <= dwell + 1'b1;
      end
      if (period_start) begin
        fired <= live | rise;
        live  <= '0;
      end else begin
        live  <= live | rise;
      end
    end
  end

  always_comb begin
    row_sel = '0;
    row_sel[row] = 1'b1;
  end

  a_row_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(row_sel));

endmodule
