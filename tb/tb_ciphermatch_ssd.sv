// tb_ciphermatch_ssd: end-to-end test of the CM-IFP data path at a reduced size (2 planes of 256 bitlines, 64-word chunks, 128-coefficient ciphertexts, shortened flash latencies).
//
// Flow: the database coefficients of wordline group WB are written (CM_WRITE through
// the host port for 8 chunks, the rest placed directly into the cell-array model),
// checked in the array in vertical layout, one chunk is read back with CM_READ, the
// query and match polynomial are loaded chunk by chunk, and CM_SEARCH must return
// exactly the bitlines whose coefficient plus the query coefficient (mod 2^32) equals
// the match coefficient, in ascending order, under random back-pressure. Some planted
// matches wrap around 2^32. A second search over a group without planted matches must
// return none. Each mechanism exercised is counted; one that never happened fails.
module tb_ciphermatch_ssd;
  import cm_pkg::*;
  localparam int unsigned NP  = 2;
  localparam int unsigned PB  = 256;
  localparam int unsigned CW  = 64;
  localparam int unsigned NC  = 128;
  localparam int unsigned LRD = 40;
  localparam int unsigned LDM = 8;
  localparam int unsigned WB  = 1000;
  localparam int unsigned WB2 = 2000;
  localparam int unsigned NPLANT = 12;
  localparam int unsigned PER_BIT = 2 * LDM + LRD + 5 * LAT_LT + 3 * LAT_ANDOR + 2 * LAT_XOR + 1;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, wdata_valid, wdata_ready, rdata_valid, rdata_ready;
  logic idx_valid, idx_ready;
  cm_cmd_t cmd;
  logic [31:0] wdata, rdata, match_count;
  logic [$clog2(NP > 1 ? NP : 2)-1:0] idx_plane;
  logic [$clog2(PB)-1:0] idx_bitline;
  logic [WL_ADDR_W-1:0] arr_rd_wl, arr_prog_wl;
  logic [PB-1:0] arr_rd_data [NP];
  logic arr_prog_en;
  logic [PLANE_W-1:0] arr_prog_plane;
  logic [CHUNK_W-1:0] arr_prog_chunk;
  logic [CW-1:0] arr_prog_data;

  ciphermatch_ssd #(.NUM_PLANES(NP), .PAGE_BITS(PB), .CHUNK_WORDS(CW), .NCOEF(NC), .LAT_READ(LRD), .LAT_DMA(LDM)) dut (.*);

  nand_array_model #(.NUM_PLANES(NP), .PAGE_BITS(PB), .CHUNK_WORDS(CW)) u_arr (
    .clk, .rd_wl(arr_rd_wl), .rd_data(arr_rd_data), .prog_en(arr_prog_en),
    .prog_plane(arr_prog_plane), .prog_wl(arr_prog_wl), .prog_chunk(arr_prog_chunk),
    .prog_data(arr_prog_data));

  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_qload = 0, n_mload = 0, n_search = 0, n_match = 0;
  int n_wrap = 0, n_carry = 0, n_idx_stall = 0, n_empty_search = 0;
  logic [31:0] A [NP][PB];
  logic [31:0] Q [NC], M [NC];
  int exp_q [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  task automatic send_cmd(cm_op_e op, int plane, int wl, int chunk);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.plane = PLANE_W'(plane);
    cmd.wl_base = WL_ADDR_W'(wl); cmd.chunk = CHUNK_W'(chunk);
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic send_words(ref logic [31:0] w [CW]);
    for (int i = 0; i < CW; i++) begin
      wdata_valid = 1; wdata = w[i];
      while (!wdata_ready) @(negedge clk);
      @(negedge clk);
    end
    wdata_valid = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic cm_write(int p, int c);
    logic [31:0] w [CW];
    for (int i = 0; i < CW; i++) w[i] = A[p][c*CW + i];
    send_cmd(CM_WRITE, p, WB, c);
    send_words(w);
    n_write++;
  endtask

  task automatic cm_load(cm_op_e op, int c);
    logic [31:0] w [CW];
    for (int i = 0; i < CW; i++) w[i] = (op == CM_LOAD_QUERY) ? Q[c*CW + i] : M[c*CW + i];
    send_cmd(op, 0, 0, c);
    send_words(w);
    if (op == CM_LOAD_QUERY) n_qload++; else n_mload++;
  endtask

  task automatic cm_read(int p, int c);
    int n = 0;
    send_cmd(CM_READ, p, WB, c);
    while (n < CW) begin
      rdata_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (rdata_valid && rdata_ready) begin
        checks++;
        if (rdata !== A[p][c*CW + n]) fail($sformatf("CM_READ word %0d: %h want %h", n, rdata, A[p][c*CW + n]));
        n++;
      end
      @(negedge clk);
    end
    rdata_ready = 0;
    while (!done) @(negedge clk);
    n_read++;
  endtask

  task automatic cm_search(int wl, int expect_min);
    int t0, got = 0;
    send_cmd(CM_SEARCH, 0, wl, 0);
    t0 = cyc;
    while (!done) begin
      idx_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (idx_valid && !idx_ready) n_idx_stall++;
      if (idx_valid && idx_ready) begin
        int e;
        checks++;
        got++;
        if (exp_q.size() == 0) fail($sformatf("extra index %0d/%0d", idx_plane, idx_bitline));
        else begin
          e = exp_q.pop_front();
          if (e != int'(idx_plane) * PB + int'(idx_bitline))
            fail($sformatf("index %0d/%0d want %0d/%0d", idx_plane, idx_bitline, e / PB, e % PB));
        end
      end
      @(negedge clk);
    end
    idx_ready = 0;
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d indices missing", exp_q.size()));
    checks++;
    if (match_count != got) fail("match_count");
    checks++;
    if (cyc - t0 < 32 * PER_BIT) fail($sformatf("search took only %0d cycles", cyc - t0));
    checks++;
    if (got < expect_min) fail("too few matches");
    n_search++;
    n_match += got;
    if (got == 0) n_empty_search++;
    $display("search at wl %0d: %0d matches in %0d cycles (%0d per bit + scan)", wl, got, cyc - t0, PER_BIT);
  endtask

  function automatic logic [PB-1:0] vpage(int p, int b);
    logic [PB-1:0] pg;
    for (int k = 0; k < PB; k++) pg[k] = A[p][k][b];
    return pg;
  endfunction

  task automatic build_expected();
    exp_q.delete();
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < PB; k++) begin
        logic [31:0] q, s;
        logic [32:0] wide;
        q = Q[k % NC];
        s = A[p][k] + q;
        wide = {1'b0, A[p][k]} + {1'b0, q};
        if (s == M[k % NC]) begin
          exp_q.push_back(p * PB + k);
          if (wide[32]) n_wrap++;
        end
        if ((A[p][k][0] & q[0]) != 0) n_carry++;
      end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; wdata_valid = 0; wdata = 0; rdata_ready = 0; idx_ready = 0;
    for (int j = 0; j < NC; j++) begin Q[j] = $urandom; M[j] = $urandom; end
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < PB; k++) begin
        A[p][k] = $urandom;
        if (A[p][k] + Q[k % NC] == M[k % NC]) A[p][k] ^= 32'h1;
      end
    // planted matches; the first few with a query coefficient that forces wrap-around
    for (int n = 0; n < NPLANT; n++) begin
      int p, k;
      p = $urandom_range(0, NP - 1);
      k = $urandom_range(0, PB - 1);
      if (n < 4) begin Q[k % NC] = 32'hF000_0000 | 32'($urandom_range(0, 1 << 20)); M[k % NC] = 32'h0000_1000 + 32'(n); end
      A[p][k] = M[k % NC] - Q[k % NC];
    end
    // plant in the first and the last coefficient of the array too
    A[0][0] = M[0] - Q[0];
    A[NP-1][PB-1] = M[(PB-1) % NC] - Q[(PB-1) % NC];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // database: chunks through the host port, the rest straight into the array model
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < 32; b++) u_arr.poke(p, WB + b, vpage(p, b));
    for (int n = 0; n < 8; n++) begin
      int p, c;
      p = (n * 7) % NP;
      c = n % (PB / CW);
      // corrupt the chunk in the array so that only the write can restore it
      for (int b = 0; b < 32; b++) begin
        logic [PB-1:0] pg;
        pg = u_arr.peek(p, WB + b);
        pg[c*CW +: CW] = ~pg[c*CW +: CW];
        u_arr.poke(p, WB + b, pg);
      end
      cm_write(p, c);
    end
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < 32; b++) begin
        checks++;
        if (u_arr.peek(p, WB + b) !== vpage(p, b)) fail($sformatf("vertical layout plane %0d wl %0d", p, WB + b));
      end
    cm_read(0, 0);
    cm_read(NP - 1, (PB / CW) - 1);

    for (int c = 0; c < NC / CW; c++) cm_load(CM_LOAD_QUERY, c);
    for (int c = 0; c < NC / CW; c++) cm_load(CM_LOAD_MATCH, c);
    build_expected();
    cm_search(WB, 2);

    // a group with no planted matches
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < PB; k++) begin
        A[p][k] = $urandom;
        if (A[p][k] + Q[k % NC] == M[k % NC]) A[p][k] ^= 32'h1;
      end
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < 32; b++) u_arr.poke(p, WB2 + b, vpage(p, b));
    build_expected();
    cm_search(WB2, 0);

    $display("mechanisms: write=%0d read=%0d query_load=%0d match_load=%0d search=%0d matches=%0d wrapped=%0d carry=%0d idx_stall=%0d empty_search=%0d",
             n_write, n_read, n_qload, n_mload, n_search, n_match, n_wrap, n_carry, n_idx_stall, n_empty_search);
    checks++; if (n_write == 0) fail("no CM_WRITE");
    checks++; if (n_read == 0) fail("no CM_READ");
    checks++; if (n_qload == 0 || n_mload == 0) fail("no query/match load");
    checks++; if (n_search < 2) fail("searches");
    checks++; if (n_match == 0) fail("no match found");
    checks++; if (n_wrap == 0) fail("no wrap-around match");
    checks++; if (n_carry == 0) fail("no carry");
    checks++; if (n_idx_stall == 0) fail("no index back-pressure");
    checks++; if (n_empty_search == 0) fail("no empty search");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
