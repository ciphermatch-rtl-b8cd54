// tb_transpose_unit: random 4 KB-style chunks (reduced to 64 words) through both
// directions with random back-pressure. Slice b must hold bit b of every word; words
// rebuilt from slices must equal the bits written. Also checks the chunk latency of
// CHUNK_WORDS input beats plus COEF_BITS output beats without back-pressure.
module tb_transpose_unit;
  localparam int unsigned CW = 64, WB = 32;

  logic clk = 0, rst_n = 1;
  initial #2 rst_n = 0;  // a real falling edge, so the asynchronous reset always fires
  always #5 clk = ~clk;

  logic w_in_valid, w_in_ready, s_out_valid, s_out_ready, s_in_valid, s_in_ready;
  logic w_out_valid, w_out_ready;
  logic [WB-1:0] w_in_data, w_out_data;
  logic [CW-1:0] s_out_data, s_in_data;
  logic [4:0] s_out_idx, s_in_idx;

  transpose_unit #(.COEF_BITS(WB), .CHUNK_WORDS(CW)) dut (.*);

  int checks = 0, failures = 0;
  logic [WB-1:0] words [CW];

  task automatic h2v(bit bp);
    int cyc = 0, nout = 0;
    for (int w = 0; w < CW; w++) words[w] = $urandom;
    fork
      begin
        for (int w = 0; w < CW; w++) begin
          w_in_valid = 1; w_in_data = words[w];
          do @(posedge clk); while (!w_in_ready);
          #1 w_in_valid = 0;
          if (bp && $urandom_range(0, 1)) begin @(posedge clk); #1; end
        end
      end
      begin
        while (nout < WB) begin
          s_out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
          @(posedge clk);
          cyc++;
          if (s_out_valid && s_out_ready) begin
            checks++;
            for (int w = 0; w < CW; w++)
              if (s_out_data[w] !== words[w][s_out_idx]) begin
                failures++; $display("FAIL slice %0d word %0d", s_out_idx, w); break;
              end
            checks++;
            if (s_out_idx != 5'(nout)) begin failures++; $display("FAIL slice order"); end
            nout++;
          end
          #1;
        end
      end
    join
    if (!bp) begin
      checks++;
      if (cyc != CW + WB) begin failures++; $display("FAIL h2v took %0d cycles", cyc); end
    end
  endtask

  task automatic v2h(bit bp);
    logic [CW-1:0] sl [WB];
    int nout = 0;
    for (int b = 0; b < WB; b++) begin
      sl[b][31:0] = $urandom; sl[b][63:32] = $urandom;
    end
    fork
      begin
        for (int i = 0; i < WB; i++) begin
          int b = WB - 1 - i;   // slices may come in any order
          s_in_valid = 1; s_in_data = sl[b]; s_in_idx = 5'(b);
          do @(posedge clk); while (!s_in_ready);
          #1 s_in_valid = 0;
        end
      end
      begin
        while (nout < CW) begin
          w_out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
          @(posedge clk);
          if (w_out_valid && w_out_ready) begin
            logic [WB-1:0] e;
            for (int b = 0; b < WB; b++) e[b] = sl[b][nout];
            checks++;
            if (w_out_data !== e) begin failures++; $display("FAIL word %0d %h want %h", nout, w_out_data, e); end
            nout++;
          end
          #1;
        end
      end
    join
  endtask

  initial begin
    w_in_valid = 0; s_in_valid = 0; s_out_ready = 0; w_out_ready = 0;
    w_in_data = 0; s_in_data = 0; s_in_idx = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    h2v(0); h2v(1); v2h(0); v2h(1); h2v(1); v2h(1);
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
