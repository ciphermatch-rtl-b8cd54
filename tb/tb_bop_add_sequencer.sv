// tb_bop_add_sequencer: runs the bit-serial addition micro-program on one page latch
// bank over a small page. Column k of the cell array holds coefficient A[k] vertically
// (bit b on wordline base+b); the controller supplies bit slice b of B. Every sum slice
// returned is compared with bit b of (A[k] + B[k]) mod 2^32, and the cycles per bit and
// per addition are compared with the latency sum of the thirteen steps.
module tb_bop_add_sequencer;
  import cm_pkg::*;
  localparam int unsigned PB = 64;
  localparam int unsigned BASE = 100;
  localparam int unsigned PER_BIT = 2 * LAT_DMA + LAT_READ + 5 * LAT_LT + 3 * LAT_ANDOR
                                    + 2 * LAT_XOR + 1;   // +1: sum hand-off cycle

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic start, busy, done, cmd_valid, cmd_ready, sum_valid, sum_last;
  latch_op_e cmd_op;
  logic [1:0] cmd_sel;
  logic [WL_ADDR_W-1:0] wl_base, rd_wl;
  logic [4:0] bit_idx;
  logic [PB-1:0] din, arr_data, dout;

  bop_add_sequencer u_seq (.clk, .rst_n, .start, .wl_base, .busy, .done, .cmd_valid,
    .cmd_ready, .cmd_op, .cmd_sel, .rd_wl, .bit_idx, .sum_valid, .sum_last);
  page_latch_bank #(.PAGE_BITS(PB)) u_bank (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .cmd_op, .cmd_sel, .din, .arr_data, .dout);

  logic [31:0] A [PB], B [PB];
  int checks = 0, failures = 0;

  // cell array (vertical layout) and query slices
  always_comb begin
    for (int k = 0; k < PB; k++) begin
      arr_data[k] = (rd_wl >= BASE && rd_wl < BASE + 32) ? A[k][rd_wl - BASE] : 1'b0;
      din[k]      = B[k][bit_idx];
    end
  end

  int nbits, t_start, t_last, cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sum_valid) begin
      for (int k = 0; k < PB; k++) begin
        logic [31:0] s;
        s = A[k] + B[k];
        checks++;
        if (dout[k] !== s[bit_idx]) begin
          failures++;
          if (failures < 5) $display("FAIL bit %0d col %0d: got %0d want %0d A=%h B=%h", bit_idx, k, dout[k], s[bit_idx], A[k], B[k]);
        end
      end
      checks++;
      if (cyc - t_last != ((nbits == 0) ? PER_BIT + LAT_LT : PER_BIT)) begin
        failures++; $display("FAIL bit %0d took %0d cycles", bit_idx, cyc - t_last);
      end
      checks++;
      if (sum_last != (bit_idx == 5'd31)) begin failures++; $display("FAIL sum_last"); end
      t_last <= cyc;
      nbits  <= nbits + 1;
    end
  end

  task automatic run_add();
    @(negedge clk); start = 1; wl_base = WL_ADDR_W'(BASE);
    t_last = cyc; nbits = 0;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (nbits != 32) begin failures++; $display("FAIL %0d sum slices", nbits); end
  endtask

  initial begin
    cyc = 0; start = 0; wl_base = '0;
    for (int k = 0; k < PB; k++) begin A[k] = $urandom; B[k] = $urandom; end
    // corner cases: carry through all bits and wrap-around
    A[0] = 32'hFFFF_FFFF; B[0] = 32'h1;
    A[1] = 32'h7FFF_FFFF; B[1] = 32'h1;
    A[2] = 32'h0;         B[2] = 32'h0;
    A[3] = 32'hFFFF_FFFF; B[3] = 32'hFFFF_FFFF;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_add();
    for (int k = 0; k < PB; k++) begin A[k] = $urandom; B[k] = ~A[k]; end  // all-ones sums
    A[5] = 32'h8000_0000; B[5] = 32'h8000_0000;
    run_add();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
