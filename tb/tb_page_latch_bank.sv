// tb_page_latch_bank: random latch commands against a reference model of the S-latch and
// D-latches. After every command all four latches are read out with OUT and compared;
// every command's occupancy (cycles with cmd_ready low, plus the accept cycle) is
// compared with its latency.
module tb_page_latch_bank;
  import cm_pkg::*;
  localparam int unsigned PB = 96;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  latch_op_e cmd_op;
  logic [1:0] cmd_sel;
  logic [PB-1:0] din, arr_data, dout;

  page_latch_bank #(.PAGE_BITS(PB)) dut (.*);

  int checks = 0, failures = 0;
  logic [PB-1:0] ms, md [3];

  function automatic int lat_of(latch_op_e op);
    case (op)
      LOP_READ: return LAT_READ;
      LOP_LOAD_S, LOP_OUT: return LAT_DMA;
      LOP_AND, LOP_OR: return LAT_ANDOR;
      LOP_XOR: return LAT_XOR;
      default: return LAT_LT;
    endcase
  endfunction

  function automatic logic [PB-1:0] rnd();
    logic [PB-1:0] v;
    for (int i = 0; i < PB; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic issue(latch_op_e op, logic [1:0] sel);
    int cyc;
    #1 cmd_op = op; cmd_sel = sel; cmd_valid = 1;
    din = rnd(); arr_data = rnd();
    do @(posedge clk); while (!cmd_ready);
    // accepted at this edge; update reference with the values sampled here
    case (op)
      LOP_LOAD_S: ms = din;
      LOP_READ:   ms = arr_data;
      LOP_S2D:    md[sel] = ms;
      LOP_D2S:    ms = md[sel];
      LOP_AND:    ms = ms & md[sel];
      LOP_OR:     md[sel] = md[sel] | ms;
      LOP_XOR:    md[1] = md[1] ^ md[2];
      LOP_RST_D:  md[sel] = '0;
      default: ;
    endcase
    #1 cmd_valid = 0;
    cyc = 1;
    @(posedge clk);
    while (!cmd_ready) begin cyc++; @(posedge clk); end
    checks++;
    if (cyc != lat_of(op)) begin
      failures++; $display("FAIL latency op=%s got %0d want %0d", op.name(), cyc, lat_of(op));
    end
  endtask

  task automatic check_all();
    for (int s = 0; s < 4; s++) begin
      issue(LOP_OUT, 2'(s));
      checks++;
      if (dout !== ((s == 3) ? ms : md[s])) begin
        failures++; $display("FAIL latch %0d: got %h want %h", s, dout, (s == 3) ? ms : md[s]);
      end
    end
  endtask

  initial begin
    latch_op_e ops [8] = '{LOP_LOAD_S, LOP_READ, LOP_S2D, LOP_D2S, LOP_AND, LOP_OR, LOP_XOR, LOP_RST_D};
    cmd_valid = 0; cmd_op = LOP_NOP; cmd_sel = 0; din = '0; arr_data = '0;
    ms = '0; md[0] = '0; md[1] = '0; md[2] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    check_all();
    for (int n = 0; n < 60; n++) begin
      latch_op_e op;
      logic [1:0] sel;
      op = ops[n < 8 ? n : $urandom_range(0, 7)];
      sel = 2'($urandom_range(0, 2));
      issue(op, sel);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
