// calc_engine: the serial "Calculate Outputs" stage of one synaptic stage,
// and the period timer of the design.
//
// A free-running counter walks all NCELL x NCELL (destination, source) pairs,
// destination in the upper bits and source in the lower bits, one pair per
// clock: 64 x 64 = 4096 cycles per period, 81.92 us at 50 MHz, the ~82 us
// period of the paper's serial version. For each pair the weight is read
// from the weight memory; one cycle later, if the source is set in the
// latched firing register, the weight strength is issued to the
// destination-delay table for that destination at the weight's delay
// (acc_en/acc_dst/acc_delay/acc_w). A source that did not fire adds nothing.
//
// period_start is high in the cycle the counter is at zero. In that cycle
// the scanners latch their firing registers and the table shifts; the last
// addition of the old period (pair 4095, read one cycle earlier) is issued in
// that same cycle and the table counts it in the column it releases, so a
// complete period of additions is released each time.
//
// The visiting order and the one-cycle read latency are this design's
// choices; the 4096-cycle period and the add-if-fired rule follow the paper.
module calc_engine
  import retina_pkg::*;
#(
  parameter int NCELL_P = retina_pkg::NCELL
) (
  input  logic                              clk,
  input  logic                              rst_n,
  output logic                              period_start,
  input  logic [NCELL_P-1:0]                fired,
  // weight memory read port
  output logic [$clog2(NCELL_P*NCELL_P)-1:0] w_addr,
  input  weight_t                           w_data,
  // accumulate command to the destination-delay table
  output logic                              acc_en,
  output logic [$clog2(NCELL_P)-1:0]        acc_dst,
  output logic [DELAY_W-1:0]                acc_delay,
  output wval_t                             acc_w
);
  localparam int IW = $clog2(NCELL_P);
  localparam int CW = $clog2(NCELL_P * NCELL_P);

  logic [CW-1:0] cnt;
  logic          valid_q;
  logic [IW-1:0] src_q, dst_q;

  assign period_start = (cnt == '0);
  assign w_addr       = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      valid_q <= 1'b0;
      src_q   <= '0;
      dst_q   <= '0;
    end else begin
      cnt     <= cnt + 1'b1;      // wraps after NCELL*NCELL cycles
      valid_q <= 1'b1;
      src_q   <= cnt[IW-1:0];
      dst_q   <= cnt[CW-1:IW];
    end
  end

  always_comb begin
    acc_en    = valid_q && fired[src_q];
    acc_dst   = dst_q;
    acc_delay = w_data.delay;
    acc_w     = w_data.w;
  end

endmodule
