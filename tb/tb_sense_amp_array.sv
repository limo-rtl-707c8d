// tb_sense_amp_array: drives random signed column currents and checks that
// the outputs latch (current > 0) only in clocks with sa_en high and hold
// otherwise, and that reset clears them.
module tb_sense_amp_array;
  localparam int COLS = 80, CUR_W = 8;
  logic clk = 0, rst_n = 0, sa_en = 0;
  always #5 clk = ~clk;
  logic signed [CUR_W-1:0] col_cur [COLS];
  logic [COLS-1:0] sa_out, expv;
  int checks = 0, failures = 0;

  sense_amp_array #(.COLS(COLS), .CUR_W(CUR_W)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < COLS; c++) col_cur[c] = 8'sd5;
    repeat (2) @(negedge clk);
    checks++; if (sa_out != '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    expv = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      sa_en = 1'($urandom);
      for (int c = 0; c < COLS; c++) begin
        int v;
        v = int'($urandom % 161) - 80;
        if (t % 7 == 0) v = 0;
        col_cur[c] = CUR_W'(v);
        if (sa_en) expv[c] = (v > 0);
      end
      @(negedge clk);
      sa_en = 0;
      checks++;
      if (sa_out != expv) begin failures++; $display("FAIL t%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
