// ciphermatch_ssd: the in-flash-processing (CM-IFP) data path of a CIPHERMATCH SSD.
//
// The database is stored as BFV ciphertext coefficients in vertical layout: coefficient
// k of a wordline group sits on one bitline, its bit b on wordline wl_base + b. A search
// adds the encrypted (negated, replicated) query to every stored coefficient of every
// plane at once with bit-serial addition inside the flash latches, then compares each
// sum with the encrypted all-ones "match polynomial" and returns the positions that
// are equal.
//
// Blocks: transpose_unit (host words <-> vertical slices), two slice_buffers (query,
// match polynomial), bop_add_sequencer (13-step bit-serial adder micro-program),
// NUM_PLANES page_latch_banks (S-latch + D-latches of each plane, commanded in
// lockstep), index_gen_unit (bit-serial compare and index scan).
// Not inside: the NAND cell arrays (ports arr_*), host interface, FTL/mapping tables,
// controller cores and internal DRAM. Addresses arriving here are already physical.
//
// Host commands (cmd_valid/cmd_ready, cm_cmd_t):
//   CM_WRITE      take CHUNK_WORDS words on wdata, transpose, program COEF_BITS
//                 partial pages (plane, wl_base + b, column chunk) through arr_prog_*.
//   CM_READ       read wordlines wl_base .. +COEF_BITS-1 of plane, take column chunk,
//                 transpose back, return CHUNK_WORDS words on rdata. Each page read
//                 waits LAT_READ + LAT_DMA cycles.
//   CM_LOAD_QUERY take CHUNK_WORDS query coefficients into column chunk `chunk` of the
//   CM_LOAD_MATCH query / match buffer (a full ciphertext is NCOEF/CHUNK_WORDS chunks).
//   CM_SEARCH     bop_add over all planes at wl_base, then stream every matching
//                 (plane, bitline) on idx_*. done pulses when the scan ends.
// The paper's CM-search carries the encrypted query as a parameter; here that payload
// is delivered by CM_LOAD_QUERY / CM_LOAD_MATCH ahead of CM_SEARCH (design choice).
// done pulses at the end of every command. One command runs at a time.
module ciphermatch_ssd #(
  parameter int unsigned NUM_PLANES  = cm_pkg::NUM_PLANES,
  parameter int unsigned PAGE_BITS   = cm_pkg::PAGE_BITS,
  parameter int unsigned CHUNK_WORDS = cm_pkg::CHUNK_WORDS,
  parameter int unsigned NCOEF       = cm_pkg::QUERY_COEFS,
  parameter int unsigned LAT_READ    = cm_pkg::LAT_READ,
  parameter int unsigned LAT_ANDOR   = cm_pkg::LAT_ANDOR,
  parameter int unsigned LAT_LT      = cm_pkg::LAT_LT,
  parameter int unsigned LAT_XOR     = cm_pkg::LAT_XOR,
  parameter int unsigned LAT_DMA     = cm_pkg::LAT_DMA
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host command and data streams
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  cm_pkg::cm_cmd_t               cmd,
  output logic                          done,
  input  logic                          wdata_valid,
  output logic                          wdata_ready,
  input  logic [cm_pkg::COEF_BITS-1:0]  wdata,
  output logic                          rdata_valid,
  input  logic                          rdata_ready,
  output logic [cm_pkg::COEF_BITS-1:0]  rdata,
  output logic                          idx_valid,
  input  logic                          idx_ready,
  output logic [$clog2(NUM_PLANES > 1 ? NUM_PLANES : 2)-1:0] idx_plane,
  output logic [$clog2(PAGE_BITS)-1:0]  idx_bitline,
  output logic [31:0]                   match_count,
  // NAND cell arrays: all planes sense the same wordline
  output logic [cm_pkg::WL_ADDR_W-1:0]  arr_rd_wl,
  input  logic [PAGE_BITS-1:0]          arr_rd_data [NUM_PLANES],
  // partial-page program of one 4 KB column chunk of one plane
  output logic                          arr_prog_en,
  output logic [cm_pkg::PLANE_W-1:0]    arr_prog_plane,
  output logic [cm_pkg::WL_ADDR_W-1:0]  arr_prog_wl,
  output logic [cm_pkg::CHUNK_W-1:0]    arr_prog_chunk,
  output logic [CHUNK_WORDS-1:0]        arr_prog_data
);

  import cm_pkg::*;

  localparam int unsigned BW      = $clog2(COEF_BITS);
  localparam int unsigned NQCHUNK = NCOEF / CHUNK_WORDS;
  localparam int unsigned QCW     = $clog2(NQCHUNK > 1 ? NQCHUNK : 2);
  localparam int unsigned RDW     = $clog2(LAT_READ + LAT_DMA + 1) + 1;
  localparam int unsigned PW      = $clog2(NUM_PLANES > 1 ? NUM_PLANES : 2);

  typedef enum logic [2:0] {C_IDLE, C_WR, C_RD_PAGE, C_RD_DRAIN, C_LOAD, C_SEARCH, C_SCAN}
    cstate_e;

  cstate_e  state_q;
  cm_cmd_t  cur_q;
  logic [BW-1:0]  rd_bit_q;
  logic [RDW-1:0] rd_wait_q;
  logic           rd_pending_q;
  logic [$clog2(CHUNK_WORDS)-1:0] rd_word_q;

  assign cmd_ready = (state_q == C_IDLE);
  wire   cmd_fire  = cmd_valid && cmd_ready;

  // ---------------- transposition ----------------
  logic                 t_w_in_valid, t_w_in_ready;
  logic                 t_s_out_valid, t_s_out_ready;
  logic [CHUNK_WORDS-1:0] t_s_out_data;
  logic [BW-1:0]        t_s_out_idx;
  logic                 t_s_in_valid, t_s_in_ready;
  logic [CHUNK_WORDS-1:0] t_s_in_data;
  logic                 t_w_out_valid;

  wire host_words_in = (state_q == C_WR) || (state_q == C_LOAD);
  assign t_w_in_valid  = wdata_valid && host_words_in;
  assign wdata_ready   = t_w_in_ready && host_words_in;
  assign t_s_out_ready = 1'b1;   // programs and buffer writes take one slice per cycle

  transpose_unit #(.COEF_BITS(COEF_BITS), .CHUNK_WORDS(CHUNK_WORDS)) u_transpose (
    .clk, .rst_n,
    .w_in_valid (t_w_in_valid),  .w_in_ready (t_w_in_ready),  .w_in_data (wdata),
    .s_out_valid(t_s_out_valid), .s_out_ready(t_s_out_ready),
    .s_out_data (t_s_out_data),  .s_out_idx  (t_s_out_idx),
    .s_in_valid (t_s_in_valid),  .s_in_ready (t_s_in_ready),
    .s_in_data  (t_s_in_data),   .s_in_idx   (rd_bit_q),
    .w_out_valid(t_w_out_valid), .w_out_ready(rdata_ready),  .w_out_data(rdata)
  );
  assign rdata_valid = t_w_out_valid;

  // program port: one slice = one partial page at wordline wl_base + bit
  assign arr_prog_en    = (state_q == C_WR) && t_s_out_valid;
  assign arr_prog_plane = cur_q.plane;
  assign arr_prog_wl    = cur_q.wl_base + WL_ADDR_W'(t_s_out_idx);
  assign arr_prog_chunk = cur_q.chunk;
  assign arr_prog_data  = t_s_out_data;

  // CM_READ: the column chunk of the sensed page of the selected plane
  always_comb begin
    t_s_in_data = '0;
    for (int p = 0; p < NUM_PLANES; p++)
      if (cur_q.plane == PLANE_W'(p))
        t_s_in_data = arr_rd_data[p][cur_q.chunk*CHUNK_WORDS +: CHUNK_WORDS];
  end
  assign t_s_in_valid = (state_q == C_RD_PAGE) && rd_pending_q && (rd_wait_q == '0);

  // ---------------- query and match-polynomial buffers ----------------
  logic [BW-1:0]        seq_bit;
  logic [PAGE_BITS-1:0] query_page, match_page;
  wire  load_slice = (state_q == C_LOAD) && t_s_out_valid;

  slice_buffer #(.COEF_BITS(COEF_BITS), .NCOEF(NCOEF), .CHUNK_WORDS(CHUNK_WORDS),
                 .PAGE_BITS(PAGE_BITS)) u_query_buf (
    .clk, .rst_n,
    .wr_en   (load_slice && (cur_q.op == CM_LOAD_QUERY)),
    .wr_row  (t_s_out_idx), .wr_chunk(QCW'(cur_q.chunk)), .wr_data(t_s_out_data),
    .rd_row  (seq_bit),     .rd_page (query_page)
  );

  slice_buffer #(.COEF_BITS(COEF_BITS), .NCOEF(NCOEF), .CHUNK_WORDS(CHUNK_WORDS),
                 .PAGE_BITS(PAGE_BITS)) u_match_buf (
    .clk, .rst_n,
    .wr_en   (load_slice && (cur_q.op == CM_LOAD_MATCH)),
    .wr_row  (t_s_out_idx), .wr_chunk(QCW'(cur_q.chunk)), .wr_data(t_s_out_data),
    .rd_row  (seq_bit),     .rd_page (match_page)
  );

  // ---------------- bit-serial addition in the planes ----------------
  logic            seq_start, seq_busy, seq_done, seq_sum_valid, seq_sum_last;
  logic            ig_scanning, ig_done;
  logic            lb_valid;
  latch_op_e       lb_op;
  logic [1:0]      lb_sel;
  logic [WL_ADDR_W-1:0] seq_wl;
  logic [NUM_PLANES-1:0] lb_ready;
  logic [PAGE_BITS-1:0]  lb_dout [NUM_PLANES];

  assign seq_start = cmd_fire && (cmd.op == CM_SEARCH);

  bop_add_sequencer #(.COEF_BITS(COEF_BITS), .WL_ADDR_W(WL_ADDR_W)) u_seq (
    .clk, .rst_n,
    .start    (seq_start), .wl_base(cmd.wl_base),
    .busy     (seq_busy),  .done   (seq_done),
    .cmd_valid(lb_valid),  .cmd_ready(&lb_ready),
    .cmd_op   (lb_op),     .cmd_sel(lb_sel), .rd_wl(seq_wl),
    .bit_idx  (seq_bit),   .sum_valid(seq_sum_valid), .sum_last(seq_sum_last)
  );

  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_plane
    page_latch_bank #(
      .PAGE_BITS(PAGE_BITS), .LAT_READ(LAT_READ), .LAT_ANDOR(LAT_ANDOR),
      .LAT_LT(LAT_LT), .LAT_XOR(LAT_XOR), .LAT_DMA(LAT_DMA)
    ) u_latch (
      .clk, .rst_n,
      .cmd_valid(lb_valid), .cmd_ready(lb_ready[p]),
      .cmd_op   (lb_op),    .cmd_sel  (lb_sel),
      .din      (query_page),
      .arr_data (arr_rd_data[p]),
      .dout     (lb_dout[p])
    );
  end

  assign arr_rd_wl = (state_q == C_SEARCH) ? seq_wl : cur_q.wl_base + WL_ADDR_W'(rd_bit_q);

  // ---------------- index generation ----------------
  index_gen_unit #(.NUM_PLANES(NUM_PLANES), .PAGE_BITS(PAGE_BITS)) u_index (
    .clk, .rst_n,
    .clear      (seq_start),
    .sum_valid  (seq_sum_valid),
    .last       (seq_sum_last),
    .sum_pages  (lb_dout),
    .match_page (match_page),
    .idx_valid, .idx_ready,
    .idx_plane  (idx_plane),
    .idx_bitline(idx_bitline),
    .scanning   (ig_scanning),
    .scan_done  (ig_done),
    .match_count(match_count)
  );

  // ---------------- command control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= C_IDLE;
      cur_q        <= '0;
      rd_bit_q     <= '0;
      rd_wait_q    <= '0;
      rd_pending_q <= 1'b0;
      rd_word_q    <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        C_IDLE: if (cmd_fire) begin
          cur_q <= cmd;
          unique case (cmd.op)
            CM_WRITE:                     state_q <= C_WR;
            CM_LOAD_QUERY, CM_LOAD_MATCH: state_q <= C_LOAD;
            CM_SEARCH:                    state_q <= C_SEARCH;
            CM_READ: begin
              state_q      <= C_RD_PAGE;
              rd_bit_q     <= '0;
              rd_pending_q <= 1'b1;
              rd_wait_q    <= RDW'(LAT_READ + LAT_DMA - 1);
            end
            default:                      done    <= 1'b1;
          endcase
        end
        C_WR, C_LOAD:
          if (t_s_out_valid && t_s_out_idx == BW'(COEF_BITS - 1)) begin
            state_q <= C_IDLE;
            done    <= 1'b1;
          end
        C_RD_PAGE: begin
          if (rd_wait_q != '0) rd_wait_q <= rd_wait_q - 1'b1;
          else if (t_s_in_valid && t_s_in_ready) begin
            if (rd_bit_q == BW'(COEF_BITS - 1)) begin
              rd_pending_q <= 1'b0;
              state_q      <= C_RD_DRAIN;
            end else begin
              rd_bit_q  <= rd_bit_q + 1'b1;
              rd_wait_q <= RDW'(LAT_READ + LAT_DMA - 1);
            end
          end
        end
        C_RD_DRAIN:
          if (t_w_out_valid && rdata_ready) begin
            rd_word_q <= rd_word_q + 1'b1;
            if (rd_word_q == $bits(rd_word_q)'(CHUNK_WORDS - 1)) begin
              rd_word_q <= '0;
              state_q   <= C_IDLE;
              done      <= 1'b1;
            end
          end
        C_SEARCH: if (seq_done) state_q <= C_SCAN;
        C_SCAN: if (ig_done) begin
          state_q <= C_IDLE;
          done    <= 1'b1;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // The sequencer and the index scan only run inside a CM_SEARCH.
  a_seq_in_search: assert property (@(posedge clk) disable iff (!rst_n)
    seq_busy |-> state_q == C_SEARCH);
  a_scan_in_search: assert property (@(posedge clk) disable iff (!rst_n)
    ig_scanning |-> state_q inside {C_SEARCH, C_SCAN});

endmodule
