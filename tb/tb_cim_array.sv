// tb_cim_array: self-checking test of the crossbar. Programs every row with
// random bits through the write word-lines, then checks single-row reads,
// multi-row accumulation and ternary VMM currents (source lines joined)
// against sums computed from a shadow copy kept by the testbench. Also
// checks that a partial column-enable write leaves other columns intact.
module tb_cim_array;
  localparam int ROWS = 80, COLS = 80, CUR_W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [ROWS-1:0] wwl = '0, rwl = '0;
  logic [COLS-1:0] wbl = '0, wbl_en = '0;
  logic sl_connect = 0;
  logic signed [CUR_W-1:0] col_cur [COLS];
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  cim_array #(.ROWS(ROWS), .COLS(COLS), .CUR_W(CUR_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write_row(input int r, input logic [COLS-1:0] d, input logic [COLS-1:0] en);
    @(negedge clk);
    wwl = '0; wwl[r] = 1'b1; wbl = d; wbl_en = en;
    @(negedge clk);
    wwl = '0; wbl_en = '0;
    for (int c = 0; c < COLS; c++) if (en[c]) shadow[r][c] = d[c];
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) write_row(r, 80'({$urandom, $urandom, $urandom}), '1);
    // single-row reads
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); rwl = '0; rwl[r] = 1'b1; sl_connect = 0; #1;
      for (int c = 0; c < COLS; c++)
        check(col_cur[c] == CUR_W'(shadow[r][c]), $sformatf("read r%0d c%0d", r, c));
    end
    // partial write: only spin columns 64..79 of row 3
    write_row(3, ~shadow[3], {16'hFFFF, 64'h0});
    @(negedge clk); rwl = '0; rwl[3] = 1; #1;
    for (int c = 0; c < COLS; c++) check(col_cur[c] == CUR_W'(shadow[3][c]), "partial write");
    // multi-row accumulation and ternary VMM
    for (int t = 0; t < 20; t++) begin
      logic [ROWS-1:0] v;
      v = 80'({$urandom, $urandom, $urandom});
      for (int m = 0; m < 2; m++) begin
        @(negedge clk); rwl = v; sl_connect = m[0]; #1;
        for (int c = 0; c < COLS; c++) begin
          int a, b, exp_c;
          a = 0; b = 0;
          for (int r = 0; r < ROWS; r++) begin
            if (v[r] && shadow[r][c]) b++;
            if (c % 2 == 1 && v[r] && shadow[r][c-1]) a++;
          end
          if (!m[0])          exp_c = b;
          else if (c % 2 == 1) exp_c = b - a;
          else                exp_c = 0;
          check(int'(col_cur[c]) == exp_c, $sformatf("acc t%0d m%0d c%0d got %0d exp %0d", t, m, c, col_cur[c], exp_c));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
