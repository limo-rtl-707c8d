// tb_scratch_sram: random writes into all problem/parity/row slots, then
// reads back every slot (one-clock read latency) against a shadow array,
// and checks that writes to one parity leave the other intact.
module tb_scratch_sram;
  localparam int NP = 5, NC = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0, wpar = 0, rpar = 0;
  logic [2:0] wprob = 0, rprob = 0;
  logic [3:0] wrow = 0, rrow = 0;
  logic [NC-1:0] wdata = 0, rdata;
  logic [NC-1:0] shadow [NP][2][NC];
  int checks = 0, failures = 0;

  scratch_sram #(.N_PROB(NP), .N_CITY(NC)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic readback;
    for (int p = 0; p < NP; p++) for (int q = 0; q < 2; q++) for (int r = 0; r < NC; r++) begin
      @(negedge clk); re = 1; rprob = 3'(p); rpar = 1'(q); rrow = 4'(r);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != shadow[p][q][r]) begin failures++; $display("FAIL p%0d q%0d r%0d", p, q, r); end
    end
  endtask

  initial begin
    for (int p = 0; p < NP; p++) for (int q = 0; q < 2; q++) for (int r = 0; r < NC; r++) begin
      @(negedge clk); we = 1; wprob = 3'(p); wpar = 1'(q); wrow = 4'(r); wdata = NC'($urandom);
      shadow[p][q][r] = wdata;
    end
    @(negedge clk); we = 0;
    readback();
    // overwrite parity 0 of problem 2 only
    for (int r = 0; r < NC; r++) begin
      @(negedge clk); we = 1; wprob = 3'd2; wpar = 0; wrow = 4'(r); wdata = NC'(1) << r;
      shadow[2][0][r] = wdata;
    end
    @(negedge clk); we = 0;
    readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
