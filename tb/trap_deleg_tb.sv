// trap_deleg_tb: self-checking test of the trap-delegation decision.
//
// Directed cases walk the delegation paths of a trap raised in VS and in VU
// (to M, HS and VS) and check that traps from M and HS never go lower. Then
// 4000 random cases (mode, cause, delegation registers) are compared against
// a reference written as a case table over the five modes.
module trap_deleg_tb;
  import hyp_pkg::*;

  logic        clk = 1'b0;
  priv_mode_t  cur;
  logic        is_int;
  logic [5:0]  code;
  logic [63:0] medeleg, mideleg, hedeleg, hideleg;
  priv_mode_t  target;
  logic [5:0]  target_code;
  int checks = 0, failures = 0;
  int n_to_m = 0, n_to_hs = 0, n_to_vs = 0;

  trap_deleg dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: handler mode written out per raising mode
  function automatic priv_mode_t ref_target(priv_mode_t m, logic i, logic [5:0] c,
                                            logic [63:0] md, logic [63:0] mi,
                                            logic [63:0] hd, logic [63:0] hi);
    logic m_bit, h_bit;
    m_bit = i ? mi[c] : md[c];
    h_bit = i ? hi[c] : hd[c];
    if (m == MODE_M)                       return MODE_M;
    if (m == MODE_HS || m == MODE_U)       return m_bit ? MODE_HS : MODE_M;
    // VS or VU
    case ({m_bit, h_bit})
      2'b11:   return MODE_VS;
      2'b10:   return MODE_HS;
      default: return MODE_M;
    endcase
  endfunction

  task automatic check(string what);
    priv_mode_t exp_t;
    logic [5:0] exp_c;
    #1;
    exp_t = ref_target(cur, is_int, code, medeleg, mideleg, hedeleg, hideleg);
    exp_c = code;
    if (exp_t == MODE_VS && is_int && (code == 2 || code == 6 || code == 10)) exp_c = code - 1;
    checks++;
    if (target !== exp_t || target_code !== exp_c) begin
      failures++;
      $display("FAIL %s: mode=%p int=%0d code=%0d -> %p/%0d, expected %p/%0d",
               what, cur, is_int, code, target, target_code, exp_t, exp_c);
    end
    if (target == MODE_M) n_to_m++; else if (target == MODE_HS) n_to_hs++; else n_to_vs++;
  endtask

  task automatic directed(priv_mode_t m, logic md, logic hd, priv_mode_t expect_t);
    cur = m; is_int = 1'b0; code = EXC_LOAD_PAGE;
    medeleg = md ? (64'h1 << EXC_LOAD_PAGE) : 64'h0;
    hedeleg = hd ? (64'h1 << EXC_LOAD_PAGE) : 64'h0;
    mideleg = '0; hideleg = '0;
    #1;
    checks++;
    if (target !== expect_t) begin
      failures++;
      $display("FAIL directed from %p md=%0d hd=%0d: got %p expected %p", m, md, hd, target, expect_t);
    end
  endtask

  initial begin
    // Figure 1 a) trap raised in VS, b) trap raised in VU
    directed(MODE_VS, 0, 0, MODE_M);
    directed(MODE_VS, 1, 0, MODE_HS);
    directed(MODE_VS, 1, 1, MODE_VS);
    directed(MODE_VU, 0, 1, MODE_M);
    directed(MODE_VU, 1, 0, MODE_HS);
    directed(MODE_VU, 1, 1, MODE_VS);
    // no delegation below the raising mode
    directed(MODE_M,  1, 1, MODE_M);
    directed(MODE_HS, 1, 1, MODE_HS);
    directed(MODE_U,  1, 1, MODE_HS);
    // VS timer interrupt delegated to VS is seen there as cause 5
    cur = MODE_VU; is_int = 1'b1; code = 6'd6; medeleg = '0; hedeleg = '0;
    mideleg = 64'h444; hideleg = 64'h444;
    #1; checks++;
    if (target !== MODE_VS || target_code !== 6'd5) begin
      failures++; $display("FAIL VSTI renumbering: %p %0d", target, target_code);
    end

    for (int n = 0; n < 4000; n++) begin
      case ($urandom_range(0, 4))
        0: cur = MODE_M; 1: cur = MODE_HS; 2: cur = MODE_U; 3: cur = MODE_VS; default: cur = MODE_VU;
      endcase
      is_int  = 1'($urandom);
      code    = 6'($urandom_range(0, 23));
      medeleg = {$urandom, $urandom}; mideleg = {$urandom, $urandom};
      hedeleg = {$urandom, $urandom}; hideleg = {$urandom, $urandom};
      check("random");
    end
    if (n_to_m == 0 || n_to_hs == 0 || n_to_vs == 0) begin
      failures++; $display("FAIL: a handler mode was never chosen");
    end
    $display("handled in M=%0d HS=%0d VS=%0d", n_to_m, n_to_hs, n_to_vs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
