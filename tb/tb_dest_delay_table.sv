// tb_dest_delay_table: self-checking test of dest_delay_table.
//
// Random accumulate commands (random destination, delay and signed weight,
// issued in about two of three cycles) and a shift every 97 cycles. The
// testbench keeps its own account: a command issued in period P with delay
// d is due at the end of period P + d (a command in the shift cycle itself
// belongs to the period that is ending). After each shift the released
// column must equal what was due, destination by destination, and col_valid
// must be high for exactly that one cycle.
module tb_dest_delay_table;
  import retina_pkg::*;

  localparam int PLEN = 97;
  localparam int NPERIOD = 20;

  logic                     clk = 0;
  logic                     rst_n = 0;
  logic                     acc_en = 0;
  logic [$clog2(NCELL)-1:0] acc_dst = '0;
  logic [DELAY_W-1:0]       acc_delay = '0;
  wval_t                    acc_w = '0;
  logic                     shift = 0;
  acc_t                     col_out [NCELL];
  logic                     col_valid;

  int checks = 0, failures = 0;

  dest_delay_table dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (PLEN * (NPERIOD + 3)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int due [NPERIOD + NDELAY + 1][NCELL];

  initial begin
    foreach (due[p, i]) due[p][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPERIOD; p++) begin
      for (int t = 0; t < PLEN; t++) begin
        @(negedge clk);
        // col_valid follows the previous cycle's shift
        checks++;
        if (col_valid !== (t == 0 && p > 0)) begin failures++; $display("col_valid wrong"); end
        if (t == 0 && p > 0) begin
          for (int i = 0; i < NCELL; i++) begin
            checks++;
            if (int'(col_out[i]) != due[p - 1][i]) begin
              failures++;
              if (failures < 10) $display("period %0d dst %0d: %0d expected %0d",
                                          p - 1, i, col_out[i], due[p - 1][i]);
            end
          end
        end
        acc_en    = ($urandom_range(0, 2) != 0);
        acc_dst   = $urandom_range(0, NCELL - 1);
        acc_delay = $urandom_range(0, NDELAY - 1);
        acc_w     = wval_t'($urandom);
        shift     = (t == PLEN - 1);
        if (acc_en) due[p + int'(acc_delay)][acc_dst] += int'(acc_w);
      end
    end
    @(negedge clk);
    shift = 0; acc_en = 0;
    for (int i = 0; i < NCELL; i++) begin
      checks++;
      if (int'(col_out[i]) != due[NPERIOD - 1][i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
