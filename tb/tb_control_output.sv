// tb_control_output: self-checking test of control_output.
//
// Random totals (mostly small, some beyond a whole period, both signs) are
// loaded at the start of each 4096-cycle period. Behavioural cells latch
// their excite/inhibit inputs whenever their column is strobed, as the
// analog cells do. For every cell the testbench counts the cycles its
// current is on, from the first strobe of its column in the period to the
// next load, and checks:
//   - the current is the right one: excite for a total >= 0, inhibit below;
//   - it is on for exactly ton * 8 columns * 8 cycles, where
//     ton = min(floor(|total| / 2), 64), or to the end of the period when
//     ton is the whole period;
//   - `clamped` follows a load with a total beyond a whole period;
//   - col_sel is one-hot during the scan.
module tb_control_output;
  import retina_pkg::*;

  localparam int PERIOD = NCELL * NCELL;
  localparam int DWELL  = 8;
  localparam int SWEEPS = PERIOD / (COLS * DWELL);
  localparam int NPERIOD = 6;

  logic            clk = 0;
  logic            rst_n = 0;
  logic            load = 0;
  acc_t            totals [NCELL];
  logic [COLS-1:0] col_sel;
  logic [ROWS-1:0] exc, inh;
  logic            clamped;

  int checks = 0, failures = 0;
  int n_clamped = 0, n_exc = 0, n_inh = 0;

  control_output dut (.clk, .rst_n, .load, .totals, .col_sel, .exc, .inh, .clamped);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (PERIOD * (NPERIOD + 2)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural cells
  logic [NCELL-1:0] cell_exc, cell_inh, strobed;
  int on_exc [NCELL], on_inh [NCELL];

  always @(posedge clk) begin
    for (int i = 0; i < NCELL; i++) begin
      if (strobed[i]) begin
        if (cell_exc[i]) on_exc[i]++;
        if (cell_inh[i]) on_inh[i]++;
      end
    end
    for (int c = 0; c < COLS; c++)
      if (col_sel[c])
        for (int r = 0; r < ROWS; r++) begin
          cell_exc[r * COLS + c] <= exc[r];
          cell_inh[r * COLS + c] <= inh[r];
          // a strobe seen in the load cycle still belongs to the old period
          if (!load) strobed[r * COLS + c] <= 1'b1;
        end
  end

  int exp_ton [NCELL];
  logic exp_neg [NCELL];

  task automatic check_period();
    for (int i = 0; i < NCELL; i++) begin
      int want;
      int got_on, got_off;
      got_on  = exp_neg[i] ? on_inh[i] : on_exc[i];
      got_off = exp_neg[i] ? on_exc[i] : on_inh[i];
      checks++;
      if (got_off != 0) begin
        failures++;
        if (failures < 10) $display("cell %0d: wrong current on for %0d cycles", i, got_off);
      end
      checks++;
      if (exp_ton[i] < SWEEPS) begin
        want = exp_ton[i] * COLS * DWELL;
        if (got_on != want) begin
          failures++;
          if (failures < 10) $display("cell %0d: on %0d cycles, expected %0d", i, got_on, want);
        end
      end else if (got_on < PERIOD - 2 * COLS * DWELL) begin
        failures++;
        if (failures < 10) $display("cell %0d: clamped but on only %0d cycles", i, got_on);
      end
      if (exp_ton[i] > 0) begin
        if (exp_neg[i]) n_inh++; else n_exc++;
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(col_sel)) begin failures++; $display("col_sel %b", col_sel); end
  end

  initial begin
    cell_exc = '0; cell_inh = '0; strobed = '0;
    foreach (totals[i]) totals[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPERIOD; p++) begin
      logic any_clamp;
      any_clamp = 1'b0;
      @(negedge clk);
      if (p > 0) check_period();
      for (int i = 0; i < NCELL; i++) begin
        int v;
        case ($urandom_range(0, 4))
          0:       v = -int'($urandom_range(0, 400));
          1:       v = int'($urandom_range(120, 3000));
          default: v = int'($urandom_range(0, 300)) - 150;
        endcase
        if (p == 2) v = 0;          // one quiet period
        totals[i] = acc_t'(v);
        exp_neg[i] = (v < 0);
        exp_ton[i] = ((v < 0 ? -v : v) / 2 > SWEEPS) ? SWEEPS : (v < 0 ? -v : v) / 2;
        if ((v < 0 ? -v : v) / 2 > SWEEPS) any_clamp = 1'b1;
        on_exc[i] = 0; on_inh[i] = 0;
      end
      strobed = '0;
      load = 1;
      @(negedge clk);
      load = 0;
      checks++;
      if (clamped !== any_clamp) begin failures++; $display("clamped %b expected %b", clamped, any_clamp); end
      if (clamped) n_clamped++;
      repeat (PERIOD - 2) @(negedge clk);
    end
    @(negedge clk);
    check_period();
    checks++;
    if (n_clamped == 0 || n_exc == 0 || n_inh == 0) begin
      failures++;
      $display("mechanism not exercised: clamp %0d excite %0d inhibit %0d", n_clamped, n_exc, n_inh);
    end
    $display("clamp %0d excite %0d inhibit %0d", n_clamped, n_exc, n_inh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
