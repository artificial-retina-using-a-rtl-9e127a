// tb_retina_dct_workload: closed-loop run of retina_top with behavioural
// analog cells (analog_cell_layer) in layers 2 and 3, on test images.
//
// Layer 1 is driven by the testbench as a detector array: a bright cell
// pulses once per period, a dark one never.
//   Phase 1, default DCT program, uniformly bright image: the 2-D DCT of a
//   constant image has only the DC term, so in layer 2 only column 0 (the
//   DC term of each row) may fire and in layer 3 only cell (0,0). Checked
//   on the firing registers read out after the network has settled.
//   Phase 2, run-time reprogramming: the host rewrites all 8192 weights of
//   both stages to an identity map (127 from each cell to the cell in the
//   same place) while the network runs, and the image becomes a
//   checkerboard. Layer 3 must then fire exactly at the bright cells.
module tb_retina_dct_workload;
  import retina_pkg::*;

  localparam int PERIOD = NCELL * NCELL;
  localparam int SETTLE = 6;     // periods before counting
  localparam int COUNT  = 8;     // periods counted

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
  int                                pulses2 [NCELL], pulses3 [NCELL];

  retina_top dut (.*);

  analog_cell_layer u_layer2 (.clk, .rst_n, .row_sel(scan_row_sel[1]), .col_out(scan_col_in[1]),
                              .col_sel(stim_col_sel[0]), .exc(stim_exc[0]), .inh(stim_inh[0]),
                              .pulses(pulses2));
  analog_cell_layer u_layer3 (.clk, .rst_n, .row_sel(scan_row_sel[2]), .col_out(scan_col_in[2]),
                              .col_sel(stim_col_sel[1]), .exc(stim_exc[1]), .inh(stim_inh[1]),
                              .pulses(pulses3));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (PERIOD * (2 * (SETTLE + COUNT) + 8)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // detector layer: bright cells give a 40-cycle pulse at cycle 100..139
  logic [NCELL-1:0] image = '0;
  logic [NCELL-1:0] det_level;
  int pcycle = 0;
  always @(negedge clk) begin
    pcycle = period_start ? 0 : pcycle + 1;
    det_level = (pcycle >= 100 && pcycle < 140) ? image : '0;
  end
  always_comb begin
    scan_col_in[0] = '0;
    for (int r = 0; r < ROWS; r++)
      if (scan_row_sel[0][r]) scan_col_in[0] = det_level[r*COLS +: COLS];
  end

  int fired2 [NCELL], fired3 [NCELL];

  task automatic count_periods(input int n);
    foreach (fired2[i]) begin fired2[i] = 0; fired3[i] = 0; end
    repeat (n) begin
      @(negedge clk iff period_start);
      @(negedge clk);
      for (int i = 0; i < NCELL; i++) begin
        fired2[i] += int'(layer_fired[1][i]);
        fired3[i] += int'(layer_fired[2][i]);
      end
    end
  endtask

  task automatic expect_cells(input string what, input int fired [NCELL],
                              input logic [NCELL-1:0] want);
    for (int i = 0; i < NCELL; i++) begin
      checks++;
      if (want[i] ? (fired[i] < COUNT / 2) : (fired[i] != 0)) begin
        failures++;
        $display("%s: cell %0d fired in %0d of %0d periods, expected %s",
                 what, i, fired[i], COUNT, want[i] ? "most" : "none");
      end
    end
  endtask

  initial begin
    logic [NCELL-1:0] col0, chess;
    col0 = '0; chess = '0;
    for (int i = 0; i < NCELL; i++) begin
      col0[i]    = (i % COLS == 0);
      chess[i] = ((i / COLS + i % COLS) % 2 == 0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 1: uniform image, DCT program
    image = '1;
    repeat (SETTLE) @(negedge clk iff period_start);
    count_periods(COUNT);
    expect_cells("DCT layer 2", fired2, col0);
    expect_cells("DCT layer 3", fired3, NCELL'(1));
    $display("phase 1: layer 3 DC cell fired in %0d of %0d periods", fired3[0], COUNT);

    // phase 2: reprogram both stages to identity while running
    for (int s = 0; s < NSTAGE; s++)
      for (int a = 0; a < NCELL * NCELL; a++) begin
        @(negedge clk);
        w_we = 1; w_stage = 1'(s); w_addr = 12'(a);
        w_data = '{delay: 2'd0, w: (a / NCELL == a % NCELL) ? 8'sd127 : 8'sd0};
      end
    @(negedge clk) w_we = 0;
    image = chess;
    repeat (SETTLE) @(negedge clk iff period_start);
    count_periods(COUNT);
    expect_cells("identity layer 2", fired2, chess);
    expect_cells("identity layer 3", fired3, chess);
    $display("phase 2: layer 3 bright cell 0 fired in %0d of %0d periods", fired3[0], COUNT);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
