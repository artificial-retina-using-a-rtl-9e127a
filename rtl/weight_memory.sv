// weight_memory: the synaptic weight store of one stage (one layer pair).
//
// One word per (destination, source) pair, at address dst * NCELL + src,
// holding a complex weight: signed strength and delay (retina_pkg::weight_t).
// The paper keeps the weights in on-chip memory and lets them be rewritten
// while the network runs, so this is a simple dual-port RAM: a synchronous
// read port for the calculation engine (data one cycle after the address)
// and a write port for the host. A write and a read of the same address in
// one cycle return the old word.
//
// The memory powers up holding the DCT program of retina_pkg::dct_weight
// for stage STAGE (0: row DCT, layer 1 -> 2; 1: column DCT, layer 2 -> 3).
// Initial contents are FPGA RAM initialisation, not affected by reset; the
// choice of a power-up program is this design's.
module weight_memory
  import retina_pkg::*;
#(
  parameter int NCELL_P = retina_pkg::NCELL,
  parameter int STAGE   = 0
) (
  input  logic                            clk,
  // read port (calculation engine)
  input  logic [$clog2(NCELL_P*NCELL_P)-1:0] rd_addr,
  output weight_t                         rd_data,
  // write port (host)
  input  logic                            wr_en,
  input  logic [$clog2(NCELL_P*NCELL_P)-1:0] wr_addr,
  input  weight_t                         wr_data
);
  localparam int DEPTH = NCELL_P * NCELL_P;

  weight_t mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      mem[i] = dct_weight(STAGE, i / NCELL_P, i % NCELL_P);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
