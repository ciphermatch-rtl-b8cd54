// index_gen_unit: index generation for CIPHERMATCH. After homomorphic addition of the
// encrypted query to every stored coefficient, a coefficient whose result equals the
// encrypted "match polynomial" coefficient marks a match; this unit finds those
// coefficients and reports their positions (plane, bitline).
//
// How it works: the adder returns its result one bit position at a time, as one page
// (one bit per bitline) per plane. Instead of transposing the result back to words,
// each bit slice is compared at once with the same bit slice of the match polynomial
// and folded into a per-bitline mismatch flag (mism |= sum ^ match). After the last bit
// a bitline whose flag is still clear holds a coefficient equal to the match value.
// The flags are then scanned SCAN_W bitlines per cycle; every match is emitted in
// ascending order (plane-major, then bitline) on a valid/ready stream.
// The comparison against the encrypted match polynomial and reporting the location
// are the paper's; the paper does this in software on the SSD controller. The bit-serial
// comparison and the scan are this design's own choices. The flag storage
// (NUM_PLANES x PAGE_BITS bits, 0.5 MB at the defaults) is the result space the paper
// reserves in SSD-internal DRAM.
//
// Timing: clear (pulse) resets all flags. sum_valid with sum_pages/match_page folds one
// slice per cycle; when sum_valid arrives with last set, the scan starts on the next
// cycle. The scan takes one cycle per SCAN_W-bit group without a match plus one cycle
// per match emitted (when idx_ready is high); scan_done pulses once at the end.
module index_gen_unit #(
  parameter int unsigned NUM_PLANES = cm_pkg::NUM_PLANES,
  parameter int unsigned PAGE_BITS  = cm_pkg::PAGE_BITS,
  parameter int unsigned SCAN_W     = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          sum_valid,
  input  logic                          last,
  input  logic [PAGE_BITS-1:0]          sum_pages [NUM_PLANES],
  input  logic [PAGE_BITS-1:0]          match_page,
  output logic                          idx_valid,
  input  logic                          idx_ready,
  output logic [$clog2(NUM_PLANES > 1 ? NUM_PLANES : 2)-1:0] idx_plane,
  output logic [$clog2(PAGE_BITS)-1:0]  idx_bitline,
  output logic                          scanning,
  output logic                          scan_done,
  output logic [31:0]                   match_count
);

  localparam int unsigned PW      = $clog2(NUM_PLANES > 1 ? NUM_PLANES : 2);
  localparam int unsigned NGROUP  = PAGE_BITS / SCAN_W;
  localparam int unsigned GW      = $clog2(NGROUP > 1 ? NGROUP : 2);
  localparam int unsigned SW      = $clog2(SCAN_W);

  logic [PAGE_BITS-1:0] mism_q [NUM_PLANES];
  logic [PW-1:0]        plane_q;
  logic [GW-1:0]        group_q;
  logic [SCAN_W-1:0]    pend_q;      // matches of the group being emitted
  logic [PW-1:0]        pend_plane_q;
  logic [GW-1:0]        pend_group_q;
  logic                 walk_q;      // still groups left to load
  logic                 active_q;    // scan in progress
  logic [SW-1:0]        low_idx;

  // lowest set bit of the pending group
  always_comb begin
    low_idx = '0;
    for (int i = SCAN_W - 1; i >= 0; i--)
      if (pend_q[i]) low_idx = SW'(i);
  end

  assign idx_valid   = (pend_q != '0);
  assign idx_plane   = pend_plane_q;
  assign idx_bitline = $clog2(PAGE_BITS)'({pend_group_q, low_idx});
  assign scanning    = active_q;

  wire pend_free = (pend_q == '0) || (idx_ready && ((pend_q & (pend_q - 1'b1)) == '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PLANES; p++) mism_q[p] <= '0;
      plane_q      <= '0;
      group_q      <= '0;
      pend_q       <= '0;
      pend_plane_q <= '0;
      pend_group_q <= '0;
      walk_q       <= 1'b0;
      active_q     <= 1'b0;
      scan_done    <= 1'b0;
      match_count  <= '0;
    end else begin
      scan_done <= 1'b0;
      if (clear) begin
        for (int p = 0; p < NUM_PLANES; p++) mism_q[p] <= '0;
        pend_q      <= '0;
        walk_q      <= 1'b0;
        active_q    <= 1'b0;
        match_count <= '0;
      end else begin
        if (sum_valid) begin
          for (int p = 0; p < NUM_PLANES; p++)
            mism_q[p] <= mism_q[p] | (sum_pages[p] ^ match_page);
          if (last) begin
            walk_q   <= 1'b1;
            active_q <= 1'b1;
            plane_q <= '0;
            group_q <= '0;
          end
        end
        // emit one match per accepted cycle
        if (idx_valid && idx_ready) begin
          pend_q[low_idx] <= 1'b0;
          match_count     <= match_count + 1;
        end
        // load the next group once the pending one is (being) drained
        if (walk_q && pend_free) begin
          pend_q       <= ~mism_q[plane_q][group_q*SCAN_W +: SCAN_W];
          pend_plane_q <= plane_q;
          pend_group_q <= group_q;
          if (group_q == GW'(NGROUP - 1)) begin
            group_q <= '0;
            if (plane_q == PW'(NUM_PLANES - 1)) walk_q  <= 1'b0;
            else                                plane_q <= plane_q + 1'b1;
          end else begin
            group_q <= group_q + 1'b1;
          end
        end
        if (active_q && !walk_q && pend_free) begin
          active_q  <= 1'b0;
          scan_done <= 1'b1;
        end
      end
    end
  end

  a_page_multiple: assert property (@(posedge clk) (PAGE_BITS % SCAN_W) == 0);

endmodule
