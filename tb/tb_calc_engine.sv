// tb_calc_engine: self-checking test of calc_engine.
//
// The weight memory is modelled here as an array of random complex weights
// with a one-cycle read. The firing register is replaced with a new random
// vector at every period_start, as the scanner does. The testbench sums the
// engine's accumulate commands per (destination, delay) over each period,
// counting the command issued in the period_start cycle itself to the period
// that is ending, and compares the sums with sum over fired sources of the
// weight, computed here directly. It also checks that period_start comes
// exactly every 4096 cycles and that no command is issued for a source that
// did not fire.
module tb_calc_engine;
  import retina_pkg::*;

  localparam int AW = $clog2(NCELL * NCELL);
  localparam int NPERIOD = 6;

  logic                 clk = 0;
  logic                 rst_n = 0;
  logic                 period_start;
  logic [NCELL-1:0]     fired;
  logic [AW-1:0]        w_addr;
  weight_t              w_data;
  logic                 acc_en;
  logic [$clog2(NCELL)-1:0] acc_dst;
  logic [DELAY_W-1:0]   acc_delay;
  wval_t                acc_w;

  int checks = 0, failures = 0;

  calc_engine dut (.*);

  always #5 clk = ~clk;

  weight_t wmem [NCELL*NCELL];
  always_ff @(posedge clk) w_data <= wmem[w_addr];

  initial begin : watchdog
    repeat (NCELL * NCELL * (NPERIOD + 2)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sum [NCELL][NDELAY];
  int nadd;
  logic [NCELL-1:0] fired_used;   // vector whose additions are being summed
  int periods = 0;
  int last_start = -1, cycle = 0;

  task automatic check_period();
    for (int d = 0; d < NCELL; d++)
      for (int k = 0; k < NDELAY; k++) begin
        int e = 0;
        for (int s = 0; s < NCELL; s++)
          if (fired_used[s] && int'(wmem[d * NCELL + s].delay) == k) e += int'(wmem[d * NCELL + s].w);
        checks++;
        if (sum[d][k] != e) begin
          failures++;
          if (failures < 10) $display("period %0d dst %0d delay %0d: sum %0d expected %0d",
                                      periods, d, k, sum[d][k], e);
        end
      end
  endtask

  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (acc_en) begin
      sum[acc_dst][acc_delay] += int'(acc_w);
      nadd++;
    end
    if (period_start) begin
      if (last_start >= 0) begin
        checks++;
        if (cycle - last_start != NCELL * NCELL) begin
          failures++;
          $display("period length %0d", cycle - last_start);
        end
        check_period();
        checks++;
        if (nadd != $countones(fired_used) * NCELL) begin
          failures++;
          $display("%0d additions for %0d fired sources", nadd, $countones(fired_used));
        end
      end
      last_start = cycle;
      periods++;
      foreach (sum[d, k]) sum[d][k] = 0;
      nadd = 0;
      // the new register the engine uses from the next cycle on
      fired_used = (periods == 1) ? '0 : {$urandom, $urandom};
      fired <= fired_used;
      if (periods == NPERIOD) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    foreach (wmem[i]) wmem[i] = weight_t'($urandom);
    foreach (sum[d, k]) sum[d][k] = 0;
    nadd = 0;
    fired = '0;
    fired_used = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
  end
endmodule
