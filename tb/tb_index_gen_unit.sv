// tb_index_gen_unit: feeds the 32 bit slices of known per-bitline sums and a match
// value per coefficient, with some sums planted equal to the match value, then checks
// that exactly the planted (plane, bitline) positions come out, in ascending order,
// under random back-pressure on the index stream, and that a cleared unit with no
// matches reports none.
module tb_index_gen_unit;
  localparam int unsigned NP = 3, PB = 256, NC = 64;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic clear, sum_valid, last, idx_valid, idx_ready, scanning, scan_done;
  logic [PB-1:0] sum_pages [NP];
  logic [PB-1:0] match_page;
  logic [1:0] idx_plane;
  logic [7:0] idx_bitline;
  logic [31:0] match_count;

  index_gen_unit #(.NUM_PLANES(NP), .PAGE_BITS(PB)) dut (.*);

  logic [31:0] S [NP][PB];
  logic [31:0] M [NC];
  int exp_q [$];
  int checks = 0, failures = 0, got = 0;

  always @(posedge clk) begin
    idx_ready <= ($urandom_range(0, 3) != 0);
    if (idx_valid && idx_ready) begin
      int e;
      checks++;
      got++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra index %0d/%0d", idx_plane, idx_bitline); end
      else begin
        e = exp_q.pop_front();
        if (e != int'(idx_plane) * PB + int'(idx_bitline)) begin
          failures++; $display("FAIL index %0d/%0d want %0d", idx_plane, idx_bitline, e);
        end
      end
    end
  end

  task automatic run(int nplant);
    for (int k = 0; k < NC; k++) M[k] = $urandom;
    exp_q.delete();
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < PB; b++) begin
        S[p][b] = $urandom;
        if (S[p][b] == M[b % NC]) S[p][b] ^= 1;
      end
    for (int n = 0; n < nplant; n++) begin
      int p, b;
      p = $urandom_range(0, NP - 1);
      b = $urandom_range(0, PB - 1);
      S[p][b] = M[b % NC];
    end
    // always include the first and the last position when planting
    if (nplant > 0) begin S[0][0] = M[0]; S[NP-1][PB-1] = M[(PB-1) % NC]; end
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < PB; b++) if (S[p][b] == M[b % NC]) exp_q.push_back(p * PB + b);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    got = 0;
    for (int i = 0; i < 32; i++) begin
      for (int p = 0; p < NP; p++) for (int b = 0; b < PB; b++) sum_pages[p][b] = S[p][b][i];
      for (int b = 0; b < PB; b++) match_page[b] = M[b % NC][i];
      sum_valid = 1; last = (i == 31);
      @(negedge clk);
      sum_valid = 0; last = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    wait (scan_done);
    @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d indices missing", exp_q.size()); end
    checks++;
    if (match_count != got) begin failures++; $display("FAIL match_count %0d got %0d", match_count, got); end
  endtask

  initial begin
    clear = 0; sum_valid = 0; last = 0; match_page = '0;
    for (int p = 0; p < NP; p++) sum_pages[p] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(20);
    run(0);
    checks++;
    if (got != 0) begin failures++; $display("FAIL matches without a plant"); end
    run(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
