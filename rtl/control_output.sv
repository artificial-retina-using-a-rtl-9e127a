// control_output: the "Control Output" stage of one synaptic stage, that is
// the pulse-to-time-on conversion and the synaptic stimulating scan array.
//
// Each analog cell has one excite and one inhibit current input. The summed
// weighted input of a destination for one period is turned into a time for
// which one of the two currents is on during the next period: the sign of
// the total selects excite (>= 0) or inhibit (< 0), and the time-on is
//   ton = min(|total| >> TON_SHIFT, SWEEPS)
// in units of sweeps of the stimulating array, SWEEPS = PERIOD /
// (COLS * STIM_DWELL) sweeps per period (64 at the defaults). A total that
// asks for more than a whole period is clamped to a whole period, the
// paper's "maximum synaptic connection".
//
// The stimulating array is scanned by column: col_sel selects one column
// for STIM_DWELL cycles and the row lines exc/inh carry, for every cell of
// that column at once, whether its excite or inhibit current must be on.
// The cell keeps the state it was given until its column is selected again,
// so a current stays on from the first sweep until the sweep in which its
// time-on has run out, when the cell is given "off". Totals are loaded when
// `load` is high (the table's col_valid) and the scan restarts from column
// 0, sweep 0. `clamped` pulses in the cycle after a load in which at least
// one total was clamped.
//
// The column scan, the excite/inhibit split and the clamping follow the
// paper. The linear scale (TON_SHIFT), the sweep unit of time and the dwell
// are this design's.
module control_output
  import retina_pkg::*;
#(
  parameter int ROWS_P     = retina_pkg::ROWS,
  parameter int COLS_P     = retina_pkg::COLS,
  parameter int PERIOD     = retina_pkg::NCELL * retina_pkg::NCELL,
  parameter int STIM_DWELL = 8,
  parameter int TON_SHIFT  = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  acc_t              totals [ROWS_P*COLS_P],
  output logic [COLS_P-1:0] col_sel,
  output logic [ROWS_P-1:0] exc,
  output logic [ROWS_P-1:0] inh,
  output logic              clamped
);
  localparam int NC     = ROWS_P * COLS_P;
  localparam int SWEEPS = PERIOD / (COLS_P * STIM_DWELL);
  localparam int TW     = $clog2(SWEEPS + 1);
  localparam int CW     = (COLS_P > 1) ? $clog2(COLS_P) : 1;
  localparam int DW     = (STIM_DWELL > 1) ? $clog2(STIM_DWELL) : 1;

  logic [TW-1:0] ton [NC];
  logic [NC-1:0] neg;
  logic [CW-1:0] col;
  logic [DW-1:0] dwell;
  logic [TW-1:0] sweep;

  // Unclamped time-on of one total: |t| >> TON_SHIFT, as an unsigned number.
  function automatic logic [ACC_W-1:0] scaled_mag(input acc_t t);
    logic [ACC_W-1:0] mag;
    mag = t[ACC_W-1] ? ACC_W'(-t) : ACC_W'(t);
    return mag >> TON_SHIFT;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NC; i++) ton[i] <= '0;
      neg     <= '0;
      col     <= '0;
      dwell   <= '0;
      sweep   <= TW'(SWEEPS);
      col_sel <= '0;
      exc     <= '0;
      inh     <= '0;
      clamped <= 1'b0;
    end else begin
      clamped <= 1'b0;
      if (load) begin
        for (int i = 0; i < NC; i++) begin
          ton[i] <= (scaled_mag(totals[i]) > ACC_W'(SWEEPS)) ? TW'(SWEEPS)
                                                             : TW'(scaled_mag(totals[i]));
          neg[i] <= totals[i][ACC_W-1];
          if (scaled_mag(totals[i]) > ACC_W'(SWEEPS)) clamped <= 1'b1;
        end
        col   <= '0;
        dwell <= '0;
        sweep <= '0;
      end else if (int'(sweep) < SWEEPS) begin
        if (int'(dwell) == STIM_DWELL - 1) begin
          dwell <= '0;
          if (int'(col) == COLS_P - 1) begin
            col   <= '0;
            sweep <= sweep + 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end else begin
          dwell <= dwell + 1'b1;
        end
      end
      // drive the selected column: registered outputs
      col_sel <= '0;
      exc     <= '0;
      inh     <= '0;
      if (!load && int'(sweep) < SWEEPS) begin
        col_sel[col] <= 1'b1;
        for (int r = 0; r < ROWS_P; r++) begin
          exc[r] <= (sweep < ton[r * COLS_P + int'(col)]) && !neg[r * COLS_P + int'(col)];
          inh[r] <= (sweep < ton[r * COLS_P + int'(col)]) &&  neg[r * COLS_P + int'(col)];
        end
      end
    end
  end

  // at most one column strobed, and never both currents of a cell at once
  a_col_onehot0: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col_sel));
  a_exc_inh:     assert property (@(posedge clk) disable iff (!rst_n) (exc & inh) == '0);

endmodule
