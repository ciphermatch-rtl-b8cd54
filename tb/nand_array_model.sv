// nand_array_model: behavioural model of the NAND cell arrays of all planes, for
// testbenches only. It stores pages sparsely (only wordlines that were written), reads
// the wordline rd_wl of every plane into rd_data one cycle after the address changes,
// and merges a partial-page program (one column chunk of one plane) into the stored
// page. Sensing latency is not modelled here: the latch bank's READ command accounts
// for it. poke/peek give testbenches direct access to whole pages.
module nand_array_model #(
  parameter int unsigned NUM_PLANES  = cm_pkg::NUM_PLANES,
  parameter int unsigned PAGE_BITS   = cm_pkg::PAGE_BITS,
  parameter int unsigned CHUNK_WORDS = cm_pkg::CHUNK_WORDS
) (
  input  logic                         clk,
  input  logic [cm_pkg::WL_ADDR_W-1:0] rd_wl,
  output logic [PAGE_BITS-1:0]         rd_data [NUM_PLANES],
  input  logic                         prog_en,
  input  logic [cm_pkg::PLANE_W-1:0]   prog_plane,
  input  logic [cm_pkg::WL_ADDR_W-1:0] prog_wl,
  input  logic [cm_pkg::CHUNK_W-1:0]   prog_chunk,
  input  logic [CHUNK_WORDS-1:0]       prog_data
);
  logic [PAGE_BITS-1:0] mem [longint];
  logic [cm_pkg::WL_ADDR_W-1:0] last_wl = '1;
  bit   dirty = 1'b1;
  int   programs = 0;

  function automatic longint key(int p, int wl);
    return (longint'(p) << 32) | longint'(wl);
  endfunction

  function automatic logic [PAGE_BITS-1:0] peek(int p, int wl);
    if (mem.exists(key(p, wl))) return mem[key(p, wl)];
    return '1;   // erased flash reads as all ones
  endfunction

  task automatic poke(int p, int wl, logic [PAGE_BITS-1:0] d);
    mem[key(p, wl)] = d;
    dirty = 1'b1;
  endtask

  always @(posedge clk) begin
    if (prog_en) begin
      logic [PAGE_BITS-1:0] pg;
      pg = peek(int'(prog_plane), int'(prog_wl));
      pg[int'(prog_chunk)*CHUNK_WORDS +: CHUNK_WORDS] = prog_data;
      mem[key(int'(prog_plane), int'(prog_wl))] = pg;
      dirty = 1'b1;
      programs++;
    end
    if (dirty || rd_wl != last_wl) begin
      for (int p = 0; p < NUM_PLANES; p++) rd_data[p] <= peek(p, int'(rd_wl));
      last_wl <= rd_wl;
      dirty = 1'b0;
    end
  end
endmodule
