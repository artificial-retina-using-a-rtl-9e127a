// tb_weight_memory: self-checking test of weight_memory.
//
// Two instances (stage 0 and stage 1) are read at every address and their
// power-up contents compared with the DCT weights computed here in floating
// point: round(254 * c(k) * cos((2n+1) k pi / 16)), placed by row (stage 0)
// or by column (stage 1), zero delay. Then random words are written and read
// back, including a read of the address being written, which must return
// the old word, and the one-cycle read latency is checked.
module tb_weight_memory;
  import retina_pkg::*;

  localparam int AW = $clog2(NCELL * NCELL);
  localparam real PI = 3.14159265358979;

  logic          clk = 0;
  logic [AW-1:0] rd_addr;
  weight_t       rd_data0, rd_data1;
  logic          wr_en;
  logic [AW-1:0] wr_addr;
  weight_t       wr_data;

  int checks = 0, failures = 0;

  weight_memory #(.STAGE(0)) dut0 (.clk, .rd_addr, .rd_data(rd_data0),
                                   .wr_en, .wr_addr, .wr_data);
  weight_memory #(.STAGE(1)) dut1 (.clk, .rd_addr, .rd_data(rd_data1),
                                   .wr_en(1'b0), .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_dct(input int k, input int n);
    real c;
    c = (k == 0) ? $sqrt(1.0 / 8.0) : 0.5;
    return int'($floor(254.0 * c * $cos((2.0 * n + 1.0) * k * PI / 16.0) + 0.5));
  endfunction

  function automatic int ref_weight(input int stage, input int dst, input int src);
    int dr, dc, sr, sc;
    dr = dst / 8; dc = dst % 8; sr = src / 8; sc = src % 8;
    if (stage == 0) return (dr == sr) ? ref_dct(dc, sc) : 0;
    else            return (dc == sc) ? ref_dct(dr, sr) : 0;
  endfunction

  task automatic compare(input string what, input weight_t got, input int w, input int d);
    checks++;
    if (int'(got.w) != w || int'(got.delay) != d) begin
      failures++;
      if (failures < 10) $display("%s: got w=%0d d=%0d expected w=%0d d=%0d",
                                  what, got.w, got.delay, w, d);
    end
  endtask

  weight_t shadow [NCELL*NCELL];

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    // power-up DCT program
    for (int a = 0; a < NCELL * NCELL; a++) begin
      @(negedge clk) rd_addr = AW'(a);
      @(negedge clk);
      compare("stage0 init", rd_data0, ref_weight(0, a / NCELL, a % NCELL), 0);
      compare("stage1 init", rd_data1, ref_weight(1, a / NCELL, a % NCELL), 0);
      shadow[a].w = wval_t'(ref_weight(0, a / NCELL, a % NCELL));
      shadow[a].delay = '0;
    end
    // random writes with read-back
    for (int i = 0; i < 300; i++) begin
      int a;
      weight_t v;
      a = $urandom_range(0, NCELL * NCELL - 1);
      v = weight_t'($urandom);
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = v; rd_addr = AW'(a);
      @(negedge clk);
      wr_en = 0;
      compare("read during write", rd_data0, int'(shadow[a].w), int'(shadow[a].delay));
      shadow[a] = v;
      @(negedge clk);
      compare("read back", rd_data0, int'(v.w), int'(v.delay));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
