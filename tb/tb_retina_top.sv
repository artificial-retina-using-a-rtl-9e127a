// tb_retina_top: end-to-end test of retina_top at its default sizes
// (8x8x3 cells, 4096-cycle period).
//
// The testbench stands in for the three analog cell layers at their pins:
//   - each layer answers its row select with the levels of its cells; in
//     every period chosen cells give a 40-cycle pulse at a random time.
//     Layer 1 cells pulse with a probability set by a fixed test image
//     (bright cells pulse more often), layers 2 and 3 at random;
//   - layers 2 and 3 latch their excite/inhibit lines when their column is
//     strobed, like the analog cells, and the testbench counts for how many
//     cycles each cell's excite or inhibit current is on in each period.
// A reference model computes, from the pulses it generated and DCT weights
// worked out here in floating point, what every destination cell must get:
// pulses of period p, through a weight with delay d, stimulate in period
// p + 2 + d, with time-on min(floor(|sum| / 2), 64) sweeps of 64 cycles, on
// the excite input for sum >= 0 and the inhibit input below.
// It also checks the three firing registers read out after each period.
// In period 4 the host rewrites two stage-0 weights, one of them with a
// delay of 2 periods, and the reference follows the new program.
// Mechanisms counted (each must occur): pulses registered, weights added,
// delayed additions, excite and inhibit currents, clamping to a whole
// period, run-time weight rewrite.
module tb_retina_top;
  import retina_pkg::*;

  localparam int PERIOD  = NCELL * NCELL;
  localparam int SWEEP   = COLS * 8;            // cycles per stimulating sweep
  localparam int SWEEPS  = PERIOD / SWEEP;
  localparam int NPERIOD = 14;
  localparam real PI = 3.14159265358979;

  logic                              clk = 0;
  logic                              rst_n = 0;
  logic [NLAYER-1:0][ROWS-1:0]       scan_row_sel;
  logic [NLAYER-1:0][COLS-1:0]       scan_col_in;
  logic [NSTAGE-1:0][COLS-1:0]       stim_col_sel;
  logic [NSTAGE-1:0][ROWS-1:0]       stim_exc, stim_inh;
  logic                              w_we = 0;
  logic [$clog2(NSTAGE)-1:0]         w_stage = '0;
  logic [$clog2(NCELL*NCELL)-1:0]    w_addr = '0;
  weight_t                           w_data = '0;
  logic                              period_start;
  logic [NLAYER-1:0][NCELL-1:0]      layer_fired;
  logic [NLAYER-1:0]                 pulse_seen;
  logic [NSTAGE-1:0]                 acc_add, acc_delayed, clamped;

  retina_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pulse = 0, n_add = 0, n_delayed = 0, n_clamp = 0, n_exc = 0, n_inh = 0, n_rewrite = 0;

  initial begin : watchdog
    repeat (PERIOD * (NPERIOD + 3)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference weights ----------------
  int  ref_w [NSTAGE][NCELL][NCELL];
  int  ref_d [NSTAGE][NCELL][NCELL];

  function automatic int ref_dct(input int k, input int n);
    real c;
    c = (k == 0) ? $sqrt(1.0 / 8.0) : 0.5;
    return int'($floor(254.0 * c * $cos((2.0 * n + 1.0) * k * PI / 16.0) + 0.5));
  endfunction

  // ---------------- the cell layers ----------------
  logic [NCELL-1:0] level [NLAYER];
  int               pstart [NLAYER][NCELL];     // pulse start in this period, -1 none
  logic [NCELL-1:0] pulsed [NLAYER][NPERIOD + 4];

  always_comb begin
    for (int l = 0; l < NLAYER; l++) begin
      scan_col_in[l] = '0;
      for (int r = 0; r < ROWS; r++)
        if (scan_row_sel[l][r]) scan_col_in[l] = level[l][r*COLS +: COLS];
    end
  end

  // stimulated layers 2 and 3: latch on column strobe, count on-time
  logic [NCELL-1:0] cell_exc [NSTAGE], cell_inh [NSTAGE], strobed [NSTAGE];
  int on_exc [NSTAGE][NCELL], on_inh [NSTAGE][NCELL];
  int pcycle = 0;     // cycle within the period, 0 at period_start
  int period = -1;

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NSTAGE; s++) begin
      for (int i = 0; i < NCELL; i++)
        if (strobed[s][i]) begin
          if (cell_exc[s][i]) on_exc[s][i]++;
          if (cell_inh[s][i]) on_inh[s][i]++;
        end
      for (int c = 0; c < COLS; c++)
        if (stim_col_sel[s][c])
          for (int r = 0; r < ROWS; r++) begin
            cell_exc[s][r*COLS + c] <= stim_exc[s][r];
            cell_inh[s][r*COLS + c] <= stim_inh[s][r];
            if (pcycle >= 2) strobed[s][r*COLS + c] <= 1'b1;
          end
    end
    if (|pulse_seen) n_pulse++;
    n_add     += $countones(acc_add);
    n_delayed += $countones(acc_delayed);
    n_clamp   += $countones(clamped);
  end

  // expected totals: due[stage][period][dst]
  int due [NSTAGE][NPERIOD + 8][NCELL];

  task automatic check_stim(input int q);
    for (int s = 0; s < NSTAGE; s++)
      for (int i = 0; i < NCELL; i++) begin
        int t, mag, ton, got_on, got_off;
        t   = due[s][q][i];
        mag = (t < 0) ? -t : t;
        ton = (mag / 2 > SWEEPS) ? SWEEPS : mag / 2;
        got_on  = (t < 0) ? on_inh[s][i] : on_exc[s][i];
        got_off = (t < 0) ? on_exc[s][i] : on_inh[s][i];
        checks++;
        if (got_off != 0 ||
            (ton < SWEEPS && got_on != ton * SWEEP) ||
            (ton == SWEEPS && got_on < PERIOD - 2 * SWEEP)) begin
          failures++;
          if (failures < 12)
            $display("period %0d stage %0d cell %0d: total %0d, on %0d/%0d cycles, expected %0d",
                     q, s, i, t, got_on, got_off, ton * SWEEP);
        end
        if (ton > 0) begin
          if (t < 0) n_inh++; else n_exc++;
        end
      end
  endtask

  // test image for layer 1: a bright diagonal band, in percent
  function automatic int brightness(input int i);
    int r, c;
    r = i / COLS; c = i % COLS;
    return (r - c <= 1 && c - r <= 1) ? 60 : 15;
  endfunction

  initial begin
    for (int s = 0; s < NSTAGE; s++)
      for (int d = 0; d < NCELL; d++)
        for (int k = 0; k < NCELL; k++) begin
          int dr, dc, sr, sc;
          dr = d / COLS; dc = d % COLS; sr = k / COLS; sc = k % COLS;
          ref_d[s][d][k] = 0;
          if (s == 0) ref_w[s][d][k] = (dr == sr) ? ref_dct(dc, sc) : 0;
          else        ref_w[s][d][k] = (dc == sc) ? ref_dct(dr, sr) : 0;
        end
    foreach (due[s, q, i]) due[s][q][i] = 0;
    for (int l = 0; l < NLAYER; l++) begin
      level[l] = '0;
      for (int i = 0; i < NCELL; i++) pstart[l][i] = -1;
    end
    for (int s = 0; s < NSTAGE; s++) begin
      cell_exc[s] = '0; cell_inh[s] = '0; strobed[s] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // one process paces the periods, drives the layers and checks; it works
  // on the falling edge, when the controller outputs are settled
  initial begin
    @(posedge rst_n);
    while (period < NPERIOD) begin
      @(negedge clk);
      if (period_start) begin
        // ---- the period that ends now is `period`; the new one is period+1
        if (period >= 0) begin
          // the stimulation window of `period` is complete
          check_stim(period);
        end
        period++;
        pcycle = 0;
        for (int s = 0; s < NSTAGE; s++) begin
          strobed[s] = '0;
          for (int i = 0; i < NCELL; i++) begin on_exc[s][i] = 0; on_inh[s][i] = 0; end
        end
        // host rewrites in period 4, before the engine reaches the pairs
        if (period == 4) begin
          ref_w[0][5][3] = 100; ref_d[0][5][3] = 2;   // destination 5 <- source 3
          ref_w[0][9][9] = -128; ref_d[0][9][9] = 0;  // destination 9 <- source 9
        end
        // pulses of period-1 are summed now with the current weights
        if (period >= 1)
          for (int s = 0; s < NSTAGE; s++)
            for (int k = 0; k < NCELL; k++)
              if (pulsed[s][period - 1][k])
                for (int d = 0; d < NCELL; d++)
                  due[s][period + 1 + ref_d[s][d][k]][d] += ref_w[s][d][k];
        // choose the pulses of the new period
        for (int l = 0; l < NLAYER; l++) begin
          pulsed[l][period] = '0;
          for (int i = 0; i < NCELL; i++) begin
            int prob;
            prob = (l == 0) ? brightness(i) : 25;
            pstart[l][i] = -1;
            if (period < NPERIOD - 3 && int'($urandom_range(0, 99)) < prob) begin
              pstart[l][i] = 20 + $urandom_range(0, PERIOD - 100);
              pulsed[l][period][i] = 1'b1;
            end
          end
        end
      end else begin
        pcycle++;
      end
      // firing registers, latched at this period's start, hold the last period
      if (pcycle == 3 && period >= 1)
        for (int l = 0; l < NLAYER; l++) begin
          checks++;
          if (layer_fired[l] !== pulsed[l][period - 1]) begin
            failures++;
            $display("period %0d layer %0d: fired %h expected %h",
                     period, l, layer_fired[l], pulsed[l][period - 1]);
          end
        end
      // host weight writes
      w_we <= 1'b0;
      if (period == 4 && pcycle == 5) begin
        w_we <= 1'b1; w_stage <= '0; w_addr <= 12'(5 * NCELL + 3);
        w_data <= '{delay: 2'd2, w: 8'sd100};
        n_rewrite++;
      end
      if (period == 4 && pcycle == 6) begin
        w_we <= 1'b1; w_stage <= '0; w_addr <= 12'(9 * NCELL + 9);
        w_data <= '{delay: 2'd0, w: -8'sd128};
        n_rewrite++;
      end
      // cell levels
      for (int l = 0; l < NLAYER; l++)
        for (int i = 0; i < NCELL; i++)
          level[l][i] <= (pstart[l][i] >= 0 && pcycle >= pstart[l][i] && pcycle < pstart[l][i] + 40);
    end
    checks++;
    if (n_pulse == 0 || n_add == 0 || n_delayed == 0 || n_clamp == 0 ||
        n_exc == 0 || n_inh == 0 || n_rewrite == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("pulses %0d additions %0d delayed %0d clamps %0d excite %0d inhibit %0d rewrites %0d",
             n_pulse, n_add, n_delayed, n_clamp, n_exc, n_inh, n_rewrite);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
