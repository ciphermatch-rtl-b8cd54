// page_latch_bank: the sensing latch (S-latch) and three data latches (D-latch 0..2) of
// one NAND flash plane, one bit of each per bitline, with the in-latch logic used for
// bit-serial addition.
//
// Function per command (one command at a time, all bitlines in parallel):
//   LOAD_S  S  <= din                    page sent by the controller (latch_write)
//   READ    S  <= arr_data               sensed wordline of the cell array (flash_read)
//   S2D     D[sel] <= S                  RST_D resets OUT_D, SET_D lets OUT_S set it
//   D2S     S  <= D[sel]
//   AND     S  <= S & D[sel]             EN/M8 + M7 discharge the precharged bitline when
//                                        D is 1; SET_S then clears OUT_S only where the
//                                        bitline stayed high, i.e. where D is 0
//   OR      D[sel] <= D[sel] | S         SET_D without the preceding RST_D
//   XOR     D1 <= D1 ^ D2                existing XOR circuit between D-latches 1 and 2
//   RST_D   D[sel] <= 0
//   OUT     dout <= latch[sel] (sel 3 = S-latch), sent to the controller (latch_read)
// The AND/OR/copy behaviour and the D1/D2 XOR follow the paper's description of its
// modified peripheral circuit (two extra transistors M7, M8 giving bi-directional
// transfer). D2S, RST_D as separate commands and the cycle-level interface are this
// design's own choices.
//
// Interface and timing: valid/ready command port. A command is accepted when
// cmd_valid && cmd_ready; its effect on the latches is visible the next cycle, and the
// bank then stays busy (cmd_ready low) so that each command occupies exactly its
// latency in cycles (READ = LAT_READ, LOAD_S/OUT = LAT_DMA, AND/OR = LAT_ANDOR,
// XOR = LAT_XOR, transfers and resets = LAT_LT). arr_data and din are sampled on
// acceptance. Latches power up cleared on reset.
module page_latch_bank #(
  parameter int unsigned PAGE_BITS = cm_pkg::PAGE_BITS,
  parameter int unsigned LAT_READ  = cm_pkg::LAT_READ,
  parameter int unsigned LAT_ANDOR = cm_pkg::LAT_ANDOR,
  parameter int unsigned LAT_LT    = cm_pkg::LAT_LT,
  parameter int unsigned LAT_XOR   = cm_pkg::LAT_XOR,
  parameter int unsigned LAT_DMA   = cm_pkg::LAT_DMA
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cm_pkg::latch_op_e    cmd_op,
  input  logic [1:0]           cmd_sel,
  input  logic [PAGE_BITS-1:0] din,       // page from the controller
  input  logic [PAGE_BITS-1:0] arr_data,  // sensed page of the addressed wordline
  output logic [PAGE_BITS-1:0] dout       // page to the controller
);

  import cm_pkg::*;

  localparam int unsigned CNT_W = $clog2(LAT_READ + 1) + 1;

  logic [PAGE_BITS-1:0] s_q;
  logic [PAGE_BITS-1:0] d_q [3];
  logic [CNT_W-1:0]     busy_q;
  logic [CNT_W-1:0]     lat;

  assign cmd_ready = (busy_q == '0);
  wire accept = cmd_valid && cmd_ready;

  always_comb begin
    unique case (cmd_op)
      LOP_READ:           lat = CNT_W'(LAT_READ);
      LOP_LOAD_S, LOP_OUT: lat = CNT_W'(LAT_DMA);
      LOP_AND, LOP_OR:    lat = CNT_W'(LAT_ANDOR);
      LOP_XOR:            lat = CNT_W'(LAT_XOR);
      LOP_NOP:            lat = CNT_W'(1);
      default:            lat = CNT_W'(LAT_LT);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q    <= '0;
      d_q[0] <= '0;
      d_q[1] <= '0;
      d_q[2] <= '0;
      dout   <= '0;
      busy_q <= '0;
    end else if (accept) begin
      busy_q <= lat - CNT_W'(1);
      unique case (cmd_op)
        LOP_LOAD_S: s_q <= din;
        LOP_READ:   s_q <= arr_data;
        LOP_S2D:    if (cmd_sel != 2'd3) d_q[cmd_sel] <= s_q;
        LOP_D2S:    if (cmd_sel != 2'd3) s_q <= d_q[cmd_sel];
        LOP_AND:    if (cmd_sel != 2'd3) s_q <= s_q & d_q[cmd_sel];
        LOP_OR:     if (cmd_sel != 2'd3) d_q[cmd_sel] <= d_q[cmd_sel] | s_q;
        LOP_XOR:    d_q[1] <= d_q[1] ^ d_q[2];
        LOP_RST_D:  if (cmd_sel != 2'd3) d_q[cmd_sel] <= '0;
        LOP_OUT:    dout <= (cmd_sel == 2'd3) ? s_q : d_q[cmd_sel];
        default: ;
      endcase
    end else if (busy_q != '0) begin
      busy_q <= busy_q - CNT_W'(1);
    end
  end

  // Latch-to-latch commands address a data latch; sel 3 (the S-latch) is only legal for OUT.
  a_sel_legal: assert property (@(posedge clk) disable iff (!rst_n)
    accept && (cmd_op inside {LOP_S2D, LOP_D2S, LOP_AND, LOP_OR, LOP_RST_D}) |-> cmd_sel != 2'd3);

endmodule
