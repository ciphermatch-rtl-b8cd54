// slice_buffer: buffer for one encrypted ciphertext in vertical layout, used for the
// encrypted query and for the encrypted match polynomial of a search.
//
// It holds COEF_BITS bit slices of NCOEF bits (bit b of coefficient k is row b, bit k).
// Slices arrive from the transposition unit one 4 KB chunk (CHUNK_WORDS coefficients)
// at a time: a write puts CHUNK_WORDS bits into row wr_row at column chunk wr_chunk.
// During bit-serial addition, row rd_row is read and replicated across the page
// (PAGE_BITS / NCOEF copies), so every group of NCOEF bitlines sees the same ciphertext,
// as the database pages hold PAGE_BITS / NCOEF ciphertexts side by side.
// The paper keeps the query in SSD-internal DRAM and sends it bit by bit into the
// latches; this on-chip buffer and the replication are this design's choices.
//
// Timing: synchronous write, combinational read. Contents are cleared on reset.
module slice_buffer #(
  parameter int unsigned COEF_BITS   = cm_pkg::COEF_BITS,
  parameter int unsigned NCOEF       = cm_pkg::QUERY_COEFS,
  parameter int unsigned CHUNK_WORDS = cm_pkg::CHUNK_WORDS,
  parameter int unsigned PAGE_BITS   = cm_pkg::PAGE_BITS
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      wr_en,
  input  logic [$clog2(COEF_BITS)-1:0]              wr_row,
  input  logic [$clog2(NCOEF / CHUNK_WORDS > 1 ? NCOEF / CHUNK_WORDS : 2)-1:0] wr_chunk,
  input  logic [CHUNK_WORDS-1:0]                    wr_data,
  input  logic [$clog2(COEF_BITS)-1:0]              rd_row,
  output logic [PAGE_BITS-1:0]                      rd_page
);

  localparam int unsigned NCHUNK = NCOEF / CHUNK_WORDS;
  localparam int unsigned NREP   = PAGE_BITS / NCOEF;

  logic [NCOEF-1:0] mem_q [COEF_BITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < COEF_BITS; r++) mem_q[r] <= '0;
    end else if (wr_en) begin
      mem_q[wr_row][wr_chunk*CHUNK_WORDS +: CHUNK_WORDS] <= wr_data;
    end
  end

  always_comb begin
    for (int k = 0; k < NREP; k++) rd_page[k*NCOEF +: NCOEF] = mem_q[rd_row];
  end

  initial begin
    assert (NCOEF % CHUNK_WORDS == 0 && PAGE_BITS % NCOEF == 0 && NCHUNK >= 1)
      else $error("slice_buffer: NCOEF must be a multiple of CHUNK_WORDS and divide PAGE_BITS");
  end

endmodule
