// dest_delay_table: the destination-delay table of one synaptic stage.
//
// A table of signed accumulators, one row per destination cell and one
// column per delay slot (NDELAY periods). Column `head` collects the inputs
// due at the end of the current period; the column (head + d) mod NDELAY
// collects those delayed by d more periods. An accumulate command adds a
// weight to one entry. When `shift` is high the current column, including an
// addition made in that same cycle, is copied to `col_out`, that column is
// cleared and `head` advances, which moves every later column one period
// closer without copying any data. `col_valid` is high for one cycle after
// each shift, when `col_out` holds the new totals.
//
// The paper gives the table, its accumulate-by-destination-and-delay use and
// its shifting each period. The ring-pointer form, the number of slots and
// the width are this design's. With 64 sources, 8-bit weights and 4 slots an
// entry can reach at most 4 x 64 x 128 = 32768 in magnitude, so a 16-bit
// entry cannot overflow.
module dest_delay_table
  import retina_pkg::*;
#(
  parameter int NCELL_P  = retina_pkg::NCELL,
  parameter int NDELAY_P = retina_pkg::NDELAY
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       acc_en,
  input  logic [$clog2(NCELL_P)-1:0] acc_dst,
  input  logic [DELAY_W-1:0]         acc_delay,
  input  wval_t                      acc_w,
  input  logic                       shift,
  output acc_t                       col_out [NCELL_P],
  output logic                       col_valid
);
  localparam int HW = (NDELAY_P > 1) ? $clog2(NDELAY_P) : 1;

  acc_t          tab [NDELAY_P][NCELL_P];
  logic [HW-1:0] head;
  logic [HW-1:0] slot;

  always_comb slot = HW'((int'(head) + int'(acc_delay)) % NDELAY_P);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head      <= '0;
      col_valid <= 1'b0;
      for (int d = 0; d < NDELAY_P; d++)
        for (int i = 0; i < NCELL_P; i++)
          tab[d][i] <= '0;
      for (int i = 0; i < NCELL_P; i++)
        col_out[i] <= '0;
    end else begin
      col_valid <= shift;
      if (acc_en && !(shift && slot == head))
        tab[slot][acc_dst] <= tab[slot][acc_dst] + acc_t'(acc_w);
      if (shift) begin
        for (int i = 0; i < NCELL_P; i++) begin
          col_out[i]    <= tab[head][i] +
                           ((acc_en && slot == head && int'(acc_dst) == i) ? acc_t'(acc_w) : acc_t'(0));
          tab[head][i]  <= '0;
        end
        head <= HW'((int'(head) + 1) % NDELAY_P);
      end
    end
  end

endmodule
