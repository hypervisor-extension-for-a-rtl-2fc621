// priv_mode_reg_tb: self-checking test of the privilege-mode register.
//
// Checks the reset mode (M), then drives 3000 random single events (trap to
// M/HS/VS, MRET, SRET) with random saved-state inputs and compares the mode
// after each clock edge with a reference model of the return rules. Every
// one of the five modes must be reached.
module priv_mode_reg_tb;
  import hyp_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       trap_valid = 1'b0, mret = 1'b0, sret = 1'b0;
  priv_mode_t trap_target = MODE_M;
  priv_lvl_e  mpp = PRV_M;
  logic       mpv = 1'b0, spp = 1'b0, spv = 1'b0, vs_spp = 1'b0;
  priv_mode_t mode, exp_mode;
  int checks = 0, failures = 0;
  int seen [5];

  priv_mode_reg dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int idx(priv_mode_t m);
    if (m == MODE_M) return 0; if (m == MODE_HS) return 1; if (m == MODE_U) return 2;
    if (m == MODE_VS) return 3; return 4;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (mode !== MODE_M) begin failures++; $display("FAIL reset mode %p", mode); end
    exp_mode = MODE_M;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      trap_valid = 1'b0; mret = 1'b0; sret = 1'b0;
      mpp    = ($urandom_range(0, 2) == 0) ? PRV_M : (($urandom_range(0, 1) == 0) ? PRV_S : PRV_U);
      mpv    = 1'($urandom); spp = 1'($urandom); spv = 1'($urandom); vs_spp = 1'($urandom);
      case ($urandom_range(0, 2))
        0: begin
          trap_valid = 1'b1;
          case ($urandom_range(0, 2))
            0: trap_target = MODE_M; 1: trap_target = MODE_HS; default: trap_target = MODE_VS;
          endcase
          exp_mode = trap_target;
        end
        1: begin
          mret = 1'b1;
          exp_mode.prv = mpp;
          exp_mode.v   = (mpp != PRV_M) && mpv;
        end
        default: begin
          sret = 1'b1;
          if (exp_mode.v) exp_mode = vs_spp ? MODE_VS : MODE_VU;
          else            exp_mode = '{v: spv, prv: spp ? PRV_S : PRV_U};
        end
      endcase
      @(negedge clk);
      trap_valid = 1'b0; mret = 1'b0; sret = 1'b0;
      checks++;
      if (mode !== exp_mode) begin
        failures++;
        $display("FAIL step %0d: mode %p expected %p", n, mode, exp_mode);
      end
      seen[idx(mode)]++;
    end
    foreach (seen[i]) if (seen[i] == 0) begin
      failures++; $display("FAIL: mode %0d never reached", i);
    end
    $display("M=%0d HS=%0d U=%0d VS=%0d VU=%0d", seen[0], seen[1], seen[2], seen[3], seen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
