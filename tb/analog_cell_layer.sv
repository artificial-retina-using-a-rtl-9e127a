// analog_cell_layer: behavioural model (not synthesizable logic) of one 8x8
// layer of pulsing analog cells, at the pins the controller sees.
//
// Each cell holds the excite/inhibit state last given to it while its
// column was strobed (col_sel, exc, inh). Its "membrane" integrates +1 per
// cycle with excite on and -1 with inhibit on (not below zero) and leaks
// by one every LEAK_EVERY cycles. On reaching THRESHOLD it emits a pulse:
// its output level is high for PULSE_LEN cycles, and the membrane restarts
// from zero. The scan side answers the one-hot row select with the levels
// of that row (row_sel -> col_out, combinational). Time is compressed: a
// real cell integrates over milliseconds, here over a few thousand cycles.
module analog_cell_layer #(
  parameter int ROWS       = 8,
  parameter int COLS       = 8,
  parameter int THRESHOLD  = 2048,
  parameter int PULSE_LEN  = 40,
  parameter int LEAK_EVERY = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ROWS-1:0] row_sel,
  output logic [COLS-1:0] col_out,
  input  logic [COLS-1:0] col_sel,
  input  logic [ROWS-1:0] exc,
  input  logic [ROWS-1:0] inh,
  output int              pulses [ROWS*COLS]
);
  localparam int NC = ROWS * COLS;

  logic [NC-1:0] exc_on, inh_on, level;
  int            v [NC];
  int            pulse_left [NC];
  int            tick;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exc_on <= '0; inh_on <= '0; level <= '0; tick <= 0;
      for (int i = 0; i < NC; i++) begin v[i] <= 0; pulse_left[i] <= 0; pulses[i] <= 0; end
    end else begin
      tick <= (tick == LEAK_EVERY - 1) ? 0 : tick + 1;
      for (int c = 0; c < COLS; c++)
        if (col_sel[c])
          for (int r = 0; r < ROWS; r++) begin
            exc_on[r*COLS + c] <= exc[r];
            inh_on[r*COLS + c] <= inh[r];
          end
      for (int i = 0; i < NC; i++) begin
        int nv;
        nv = v[i] + (exc_on[i] ? 1 : 0) - (inh_on[i] ? 1 : 0) - ((tick == 0) ? 1 : 0);
        if (nv < 0) nv = 0;
        if (pulse_left[i] > 0) begin
          pulse_left[i] <= pulse_left[i] - 1;
          level[i] <= (pulse_left[i] > 1);
          v[i] <= 0;
        end else if (nv >= THRESHOLD) begin
          pulse_left[i] <= PULSE_LEN;
          level[i] <= 1'b1;
          pulses[i] <= pulses[i] + 1;
          v[i] <= 0;
        end else begin
          v[i] <= nv;
        end
      end
    end
  end

  always_comb begin
    col_out = '0;
    for (int r = 0; r < ROWS; r++)
      if (row_sel[r]) col_out = level[r*COLS +: COLS];
  end
endmodule
