// synapse_stage: all the processing between two cell layers in the serial
// controller: weight memory -> calculation engine -> destination-delay
// table -> control output (time-on conversion and stimulating scan).
//
// `fired` is the latched firing register of the source layer (from its
// cell_scanner); col_sel/exc/inh drive the stimulating array of the
// destination layer. The stage's calc_engine is also its period timer;
// period_start marks the first cycle of each 4096-cycle period and is used
// by the scanners. A source pulse registered during period k is added up
// during period k+1 and, at zero delay, stimulates during period k+2, i.e.
// from 82 us to 246 us after it, the delay range the paper gives for the
// serial version. A weight delay of d adds d periods.
//
// The host can rewrite weights at any time through wr_* (address dst * 64 +
// src). acc_add, acc_delayed and clamped are single-cycle event strobes for
// monitoring: a weight added, a weight added with a non-zero delay, and a
// time-on clamped to a whole period.
module synapse_stage
  import retina_pkg::*;
#(
  parameter int STAGE      = 0,
  parameter int STIM_DWELL = 8,
  parameter int TON_SHIFT  = 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [NCELL-1:0]                fired,
  output logic                            period_start,
  input  logic                            wr_en,
  input  logic [$clog2(NCELL*NCELL)-1:0]  wr_addr,
  input  weight_t                         wr_data,
  output logic [COLS-1:0]                 col_sel,
  output logic [ROWS-1:0]                 exc,
  output logic [ROWS-1:0]                 inh,
  output logic                            acc_add,
  output logic                            acc_delayed,
  output logic                            clamped
);
  logic [$clog2(NCELL*NCELL)-1:0] w_addr;
  weight_t                        w_data;
  logic                           acc_en;
  logic [$clog2(NCELL)-1:0]       acc_dst;
  logic [DELAY_W-1:0]             acc_delay;
  wval_t                          acc_w;
  acc_t                           totals [NCELL];
  logic                           col_valid;

  weight_memory #(.STAGE(STAGE)) u_wmem (
    .clk, .rd_addr(w_addr), .rd_data(w_data),
    .wr_en, .wr_addr, .wr_data
  );

  calc_engine u_calc (
    .clk, .rst_n, .period_start, .fired,
    .w_addr, .w_data,
    .acc_en, .acc_dst, .acc_delay, .acc_w
  );

  dest_delay_table u_table (
    .clk, .rst_n, .acc_en, .acc_dst, .acc_delay, .acc_w,
    .shift(period_start), .col_out(totals), .col_valid
  );

  control_output #(.STIM_DWELL(STIM_DWELL), .TON_SHIFT(TON_SHIFT)) u_out (
    .clk, .rst_n, .load(col_valid), .totals,
    .col_sel, .exc, .inh, .clamped
  );

  assign acc_add     = acc_en;
  assign acc_delayed = acc_en && (acc_delay != '0);

endmodule
