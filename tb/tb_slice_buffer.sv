// tb_slice_buffer: writes every (row, chunk) of a reduced buffer with random data, then
// reads every row and checks that the page holds the row replicated PAGE_BITS / NCOEF
// times; overwrites one chunk and checks that only it changed.
module tb_slice_buffer;
  localparam int unsigned NC = 128, CW = 64, PB = 512;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic wr_en;
  logic [4:0] wr_row, rd_row;
  logic wr_chunk;
  logic [CW-1:0] wr_data;
  logic [PB-1:0] rd_page;

  slice_buffer #(.NCOEF(NC), .CHUNK_WORDS(CW), .PAGE_BITS(PB)) dut (.*);

  logic [NC-1:0] ref_m [32];
  int checks = 0, failures = 0;

  task automatic wr(int r, int c, logic [CW-1:0] d);
    @(negedge clk); wr_en = 1; wr_row = 5'(r); wr_chunk = c[0]; wr_data = d;
    ref_m[r][c*CW +: CW] = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_rows();
    for (int r = 0; r < 32; r++) begin
      rd_row = 5'(r); #1;
      for (int k = 0; k < PB / NC; k++) begin
        checks++;
        if (rd_page[k*NC +: NC] !== ref_m[r]) begin failures++; $display("FAIL row %0d copy %0d", r, k); end
      end
    end
  endtask

  initial begin
    wr_en = 0; wr_row = 0; rd_row = 0; wr_chunk = 0; wr_data = 0;
    for (int r = 0; r < 32; r++) ref_m[r] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check_rows();
    for (int r = 0; r < 32; r++) for (int c = 0; c < 2; c++) wr(r, c, {$urandom, $urandom});
    check_rows();
    wr(7, 1, {$urandom, $urandom});
    check_rows();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
