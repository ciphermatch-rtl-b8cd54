// transpose_unit: data transposition between the horizontal layout the host uses (one
// COEF_BITS-wide coefficient per word) and the vertical layout of the CIPHERMATCH flash
// region (bit b of every coefficient on wordline b, one coefficient per bitline).
//
// It works on one 4 KB chunk: CHUNK_WORDS coefficients <-> COEF_BITS bit slices of
// CHUNK_WORDS bits. A single CHUNK_WORDS x COEF_BITS buffer is filled either by words
// (word w -> row w) or by slices (slice b -> column b of every row) and then drained the
// other way round:
//   horizontal -> vertical: w_in accepts CHUNK_WORDS words, then s_out gives slice
//                           0 .. COEF_BITS-1 (slice b holds bit b of word w at bit w);
//   vertical -> horizontal: s_in accepts COEF_BITS slices (s_in_idx says which bit),
//                           then w_out gives word 0 .. CHUNK_WORDS-1.
// The function and the 4 KB granularity are the paper's (it runs transposition in
// software on the SSD controller and also proposes a hardware unit like SIMDRAM's);
// the buffer organisation and the one-word-per-cycle host side are this design's own
// choice, so a chunk takes CHUNK_WORDS + COEF_BITS cycles rather than the paper's 158 ns.
//
// Interface: valid/ready streams. A direction is chosen by the first input beat while
// idle; the other input is not ready until the chunk has been drained.
module transpose_unit #(
  parameter int unsigned COEF_BITS   = cm_pkg::COEF_BITS,
  parameter int unsigned CHUNK_WORDS = cm_pkg::CHUNK_WORDS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // words in (horizontal)
  input  logic                           w_in_valid,
  output logic                           w_in_ready,
  input  logic [COEF_BITS-1:0]           w_in_data,
  // slices out (vertical)
  output logic                           s_out_valid,
  input  logic                           s_out_ready,
  output logic [CHUNK_WORDS-1:0]         s_out_data,
  output logic [$clog2(COEF_BITS)-1:0]   s_out_idx,
  // slices in (vertical)
  input  logic                           s_in_valid,
  output logic                           s_in_ready,
  input  logic [CHUNK_WORDS-1:0]         s_in_data,
  input  logic [$clog2(COEF_BITS)-1:0]   s_in_idx,
  // words out (horizontal)
  output logic                           w_out_valid,
  input  logic                           w_out_ready,
  output logic [COEF_BITS-1:0]           w_out_data
);

  localparam int unsigned WW = $clog2(CHUNK_WORDS);
  localparam int unsigned BW = $clog2(COEF_BITS);

  typedef enum logic [2:0] {T_IDLE, T_FILL_W, T_DRAIN_S, T_FILL_S, T_DRAIN_W} tstate_e;

  tstate_e              state_q;
  logic [COEF_BITS-1:0] buf_q [CHUNK_WORDS];
  logic [WW-1:0]        wcnt_q;
  logic [BW-1:0]        bcnt_q;

  assign w_in_ready  = (state_q == T_IDLE) || (state_q == T_FILL_W);
  assign s_in_ready  = ((state_q == T_IDLE) && !w_in_valid) || (state_q == T_FILL_S);
  assign s_out_valid = (state_q == T_DRAIN_S);
  assign w_out_valid = (state_q == T_DRAIN_W);
  assign s_out_idx   = bcnt_q;
  assign w_out_data  = buf_q[wcnt_q];

  always_comb begin
    for (int w = 0; w < CHUNK_WORDS; w++) s_out_data[w] = buf_q[w][bcnt_q];
  end

  wire w_fire = w_in_valid && w_in_ready;
  wire s_fire = s_in_valid && s_in_ready;

  always_ff @(posedge clk) begin
    if (w_fire) buf_q[wcnt_q] <= w_in_data;
    else if (s_fire)
      for (int w = 0; w < CHUNK_WORDS; w++) buf_q[w][s_in_idx] <= s_in_data[w];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= T_IDLE;
      wcnt_q  <= '0;
      bcnt_q  <= '0;
    end else begin
      unique case (state_q)
        T_IDLE, T_FILL_W, T_FILL_S: begin
          if (w_fire) begin
            wcnt_q  <= wcnt_q + 1'b1;
            state_q <= T_FILL_W;
            if (wcnt_q == WW'(CHUNK_WORDS - 1)) begin
              wcnt_q  <= '0;
              bcnt_q  <= '0;
              state_q <= T_DRAIN_S;
            end
          end else if (s_fire) begin
            bcnt_q  <= bcnt_q + 1'b1;
            state_q <= T_FILL_S;
            if (bcnt_q == BW'(COEF_BITS - 1)) begin
              bcnt_q  <= '0;
              wcnt_q  <= '0;
              state_q <= T_DRAIN_W;
            end
          end
        end
        T_DRAIN_S: if (s_out_ready) begin
          bcnt_q <= bcnt_q + 1'b1;
          if (bcnt_q == BW'(COEF_BITS - 1)) begin
            bcnt_q  <= '0;
            state_q <= T_IDLE;
          end
        end
        T_DRAIN_W: if (w_out_ready) begin
          wcnt_q <= wcnt_q + 1'b1;
          if (wcnt_q == WW'(CHUNK_WORDS - 1)) begin
            wcnt_q  <= '0;
            state_q <= T_IDLE;
          end
        end
        default: state_q <= T_IDLE;
      endcase
    end
  end

endmodule
