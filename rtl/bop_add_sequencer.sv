// bop_add_sequencer: the bulk "add" micro-program (bop_add). It adds a COEF_BITS-wide
// coefficient sent by the controller (B) to the coefficient stored vertically on every
// bitline (A, one bit per wordline, LSB on wl_base) of all planes at once, bit-serially,
// dropping the final carry (addition modulo 2^COEF_BITS).
//
// Sequence: first D-latch 2 (the carry) is cleared. Then, for bit i = 0 .. COEF_BITS-1,
// the thirteen steps of the paper's bit-serial full adder are issued in this order:
//    1 LOAD_S  B_i                      S  = B
//    2 S2D     D1                       D1 = B
//    3 AND     D2                       S  = B & C
//    4 XOR                              D1 = B ^ C
//    5 S2D     D0                       D0 = B & C
//    6 READ    wordline wl_base + i     S  = A
//    7 S2D     D2                       D2 = A
//    8 AND     D1                       S  = A & (B ^ C)
//    9 XOR                              D1 = A ^ B ^ C      (sum)
//   10 S2D     D2                       D2 = A & (B ^ C)
//   11 D2S     D0                       S  = B & C
//   12 OR      D2                       D2 = A(B^C) | BC    (carry out)
//   13 OUT     D1                       sum page to the controller
// The step list is the paper's; issuing it from a hardware sequencer (the paper runs it
// as SSD firmware) and the initial RST_D of the carry latch as an explicit command are
// this design's choices.
//
// Interface and timing: start (pulse, while idle) latches wl_base. Commands go out on a
// valid/ready port shared by all planes in lockstep (ready is the AND of the planes'
// readies). bit_idx selects the query bit slice the controller must present on the
// banks' din during LOAD_S. sum_valid is high for one cycle when the OUT of bit bit_idx
// has completed, i.e. while the sum page of that bit is on the banks' dout and bit_idx
// still names it; sum_last marks the last bit. done pulses the cycle after. With the banks' latencies, one bit takes
//   2*LAT_DMA + LAT_READ + 5*LAT_LT + 3*LAT_ANDOR + 2*LAT_XOR cycles,
// plus LAT_LT once for the carry reset.
module bop_add_sequencer #(
  parameter int unsigned COEF_BITS = cm_pkg::COEF_BITS,
  parameter int unsigned WL_ADDR_W = cm_pkg::WL_ADDR_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [WL_ADDR_W-1:0]         wl_base,
  output logic                         busy,
  output logic                         done,
  // command port to the page latch banks
  output logic                         cmd_valid,
  input  logic                         cmd_ready,
  output cm_pkg::latch_op_e            cmd_op,
  output logic [1:0]                   cmd_sel,
  output logic [WL_ADDR_W-1:0]         rd_wl,
  // bit being processed and completed sum slices
  output logic [$clog2(COEF_BITS)-1:0] bit_idx,
  output logic                         sum_valid,
  output logic                         sum_last
);

  import cm_pkg::*;

  localparam int unsigned NSTEP = 13;
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN, S_WAIT} state_e;

  state_e                      state_q;
  logic [3:0]                  step_q;
  logic [$clog2(COEF_BITS)-1:0] bit_q;
  logic [WL_ADDR_W-1:0]        base_q;

  // Micro-program ROM: one (op, sel) per step.
  always_comb begin
    cmd_op  = LOP_NOP;
    cmd_sel = 2'd0;
    if (state_q == S_INIT) begin
      cmd_op = LOP_RST_D; cmd_sel = 2'd2;
    end else begin
      unique case (step_q)
        4'd0:  begin cmd_op = LOP_LOAD_S; cmd_sel = 2'd0; end
        4'd1:  begin cmd_op = LOP_S2D;    cmd_sel = 2'd1; end
        4'd2:  begin cmd_op = LOP_AND;    cmd_sel = 2'd2; end
        4'd3:  begin cmd_op = LOP_XOR;    cmd_sel = 2'd1; end
        4'd4:  begin cmd_op = LOP_S2D;    cmd_sel = 2'd0; end
        4'd5:  begin cmd_op = LOP_READ;   cmd_sel = 2'd0; end
        4'd6:  begin cmd_op = LOP_S2D;    cmd_sel = 2'd2; end
        4'd7:  begin cmd_op = LOP_AND;    cmd_sel = 2'd1; end
        4'd8:  begin cmd_op = LOP_XOR;    cmd_sel = 2'd1; end
        4'd9:  begin cmd_op = LOP_S2D;    cmd_sel = 2'd2; end
        4'd10: begin cmd_op = LOP_D2S;    cmd_sel = 2'd0; end
        4'd11: begin cmd_op = LOP_OR;     cmd_sel = 2'd2; end
        4'd12: begin cmd_op = LOP_OUT;    cmd_sel = 2'd1; end
        default: ;
      endcase
    end
  end

  assign cmd_valid = (state_q == S_INIT) || (state_q == S_RUN);
  assign rd_wl     = base_q + WL_ADDR_W'(bit_q);
  assign bit_idx   = bit_q;
  assign busy      = (state_q != S_IDLE);
  assign sum_valid = (state_q == S_WAIT) && cmd_ready;
  assign sum_last  = sum_valid && (bit_q == $bits(bit_q)'(COEF_BITS - 1));

  wire fire = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      step_q    <= '0;
      bit_q     <= '0;
      base_q    <= '0;
      done      <= 1'b0;
    end else begin
      done      <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          base_q  <= wl_base;
          bit_q   <= '0;
          step_q  <= '0;
          state_q <= S_INIT;
        end
        S_INIT: if (fire) state_q <= S_RUN;
        S_RUN: if (fire) begin
          if (step_q == 4'(NSTEP - 1)) state_q <= S_WAIT;   // OUT issued: wait for its DMA
          else                         step_q  <= step_q + 4'd1;
        end
        S_WAIT: if (cmd_ready) begin
          step_q    <= '0;
          if (bit_q == $bits(bit_q)'(COEF_BITS - 1)) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            bit_q   <= bit_q + 1'b1;
            state_q <= S_RUN;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
