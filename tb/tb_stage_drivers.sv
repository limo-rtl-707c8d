// tb_stage_drivers: for every FSM state and both clocks of a state, random
// addresses and data are applied and the word-line, bit-line, source-line
// and sense-enable outputs are compared with the decoding each state is
// expected to perform.
module tb_stage_drivers;
  import limo_pkg::*;
  localparam int ROWS = 80, COLS = 80, NC = 16, SP = 64;
  state_t state;
  logic sub;
  logic [6:0] prg_row, ss_row, w_row, sto_row, chk_row;
  logic [COLS-1:0] prg_data, wbl, wbl_en;
  logic [NC-1:0] sto_spin;
  logic [ROWS-1:0] vmm_in, wwl, rwl;
  logic sl_connect, sa_en;
  int checks = 0, failures = 0;

  stage_drivers #(.ROWS(ROWS), .COLS(COLS), .N_CITY(NC), .SPIN_COL(SP)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    static state_t sts [9] = '{ST_IDLE, ST_PRG_ROW, ST_GEN, ST_LEN, ST_SS_RD, ST_W_RD, ST_STO_SOLN, ST_LAST_CITY, ST_AI_RD};
    for (int t = 0; t < 600; t++) begin
      logic [ROWS-1:0] e_wwl, e_rwl;
      logic [COLS-1:0] e_wbl, e_en;
      logic e_sl, e_sa;
      state = sts[t % 9];
      sub = 1'(t / 9);
      prg_row = 7'($urandom % ROWS); ss_row = 7'($urandom % ROWS); w_row = 7'($urandom % ROWS);
      sto_row = 7'($urandom % ROWS); chk_row = 7'($urandom % ROWS);
      prg_data = 80'({$urandom, $urandom, $urandom});
      sto_spin = NC'(1) << ($urandom % NC);
      vmm_in = 80'({$urandom, $urandom, $urandom});
      #1;
      e_wwl = '0; e_rwl = '0; e_wbl = '0; e_en = '0; e_sl = 0; e_sa = 0;
      case (state)
        ST_PRG_ROW: begin e_wwl[prg_row] = 1; e_wbl = prg_data; e_en = '1; end
        ST_SS_RD:   begin e_rwl[ss_row] = 1; e_sa = 1; end
        ST_W_RD:    begin e_rwl[w_row] = 1; e_sa = 1; end
        ST_STO_SOLN:
          if (!sub) begin
            e_wwl[sto_row] = 1;
            for (int j = 0; j < NC; j++) begin e_wbl[SP + j] = sto_spin[j]; e_en[SP + j] = 1; end
          end else begin
            e_rwl[chk_row] = 1; e_sa = 1;
          end
        ST_AI_RD:   begin e_rwl = vmm_in; e_sl = 1; e_sa = 1; end
        default: ;
      endcase
      checks++;
      if (wwl != e_wwl || rwl != e_rwl || wbl != e_wbl || wbl_en != e_en || sl_connect != e_sl || sa_en != e_sa) begin
        failures++; $display("FAIL t%0d state %s sub %0d", t, state.name(), sub);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
