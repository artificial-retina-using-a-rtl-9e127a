// retina_top: digital controller of the 8x8x3 hybrid retina (serial version).
//
// Three 8x8 layers of analog pulsing cells sit outside this module: layer 1
// turns light into pulse rates, layer 2 forms the 1-D DCT of every row of
// layer 1 and layer 3 the 1-D DCT of every column of layer 2, so layer 3
// pulses at rates that encode the 2-D DCT of the image. No synapse is wired
// in the analog array. Each cell has one scan output and one excite and one
// inhibit current input; all 64 x 64 synapses between two layers exist only
// as weights in this controller.
//
// Every layer has a cell_scanner that rasters it for pulses. The two
// synapse_stage instances (stage 0: layer 1 -> 2, stage 1: layer 2 -> 3)
// each add up weighted pulses serially over a 4096-cycle period and drive
// the destination layer's column-scanned stimulating array with excite or
// inhibit time-on. Layer 3 is scanned only for readout: its firing register
// is brought out with the other two on layer_fired, valid for the whole
// period after period_start.
//
// Ports per layer L: scan_row_sel[L] one-hot row select, scan_col_in[L]
// column read lines. Per stage S (destination layer S+2): stim_col_sel[S]
// one-hot column strobe, stim_exc[S]/stim_inh[S] row lines. The host writes
// weights through w_we/w_stage/w_addr/w_data. The remaining outputs are event
// strobes for monitoring.
//
// The layer count, the 64-cycle-per-destination serial order and the
// external analog cells follow the paper's main (hybrid, serial) form; the
// port protocol of the scanning and stimulating arrays is this design's.
module retina_top
  import retina_pkg::*;
(
  input  logic                                  clk,
  input  logic                                  rst_n,
  // scanning (read-out) arrays, one per layer
  output logic [NLAYER-1:0][ROWS-1:0]           scan_row_sel,
  input  logic [NLAYER-1:0][COLS-1:0]           scan_col_in,
  // stimulating arrays of layers 2 and 3
  output logic [NSTAGE-1:0][COLS-1:0]           stim_col_sel,
  output logic [NSTAGE-1:0][ROWS-1:0]           stim_exc,
  output logic [NSTAGE-1:0][ROWS-1:0]           stim_inh,
  // host weight port
  input  logic                                  w_we,
  input  logic [$clog2(NSTAGE)-1:0]             w_stage,
  input  logic [$clog2(NCELL*NCELL)-1:0]        w_addr,
  input  weight_t                               w_data,
  // read-out
  output logic                                  period_start,
  output logic [NLAYER-1:0][NCELL-1:0]          layer_fired,
  // monitoring strobes
  output logic [NLAYER-1:0]                     pulse_seen,
  output logic [NSTAGE-1:0]                     acc_add,
  output logic [NSTAGE-1:0]                     acc_delayed,
  output logic [NSTAGE-1:0]                     clamped
);
  logic [NSTAGE-1:0] stage_start;

  // All stages are reset together and count in lockstep; stage 0 times the
  // scanners.
  assign period_start = stage_start[0];

  a_lockstep: assert property (@(posedge clk)
    stage_start == {NSTAGE{stage_start[0]}});

  for (genvar l = 0; l < NLAYER; l++) begin : g_layer
    cell_scanner u_scan (
      .clk, .rst_n, .period_start,
      .row_sel(scan_row_sel[l]), .col_in(scan_col_in[l]),
      .fired(layer_fired[l]), .pulse_seen(pulse_seen[l])
    );
  end

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    synapse_stage #(.STAGE(s)) u_stage (
      .clk, .rst_n,
      .fired(layer_fired[s]),
      .period_start(stage_start[s]),
      .wr_en(w_we && (int'(w_stage) == s)), .wr_addr(w_addr), .wr_data(w_data),
      .col_sel(stim_col_sel[s]), .exc(stim_exc[s]), .inh(stim_inh[s]),
      .acc_add(acc_add[s]), .acc_delayed(acc_delayed[s]), .clamped(clamped[s])
    );
  end

endmodule
