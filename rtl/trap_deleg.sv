// trap_deleg: chooses the privilege mode that handles a trap.
//
// With the hypervisor extension a trap can be taken in M, HS or VS mode. A
// trap goes to M unless it was raised below M and its bit is set in medeleg
// (exceptions) or mideleg (interrupts); a trap delegated that far goes to HS
// unless it was raised while virtualized (VS or VU) and its bit is also set
// in hedeleg or hideleg, in which case it goes to VS. A trap never goes to a
// less privileged mode than the one it was raised in. The three possible
// handlers of a trap raised in VS or VU are those the paper's delegation
// figure draws; the bit-level rules (including the renumbering of the VS
// interrupts 2, 6, 10 to 1, 5, 9 when VS handles them) are the hypervisor
// specification's.
//
// Purely combinational: target and cause are valid in the cycle the inputs are.
module trap_deleg
  import hyp_pkg::*;
(
  input  priv_mode_t  cur,        // mode the trap is raised in
  input  logic        is_int,     // interrupt (1) or exception (0)
  input  logic [5:0]  code,       // cause code
  input  logic [63:0] medeleg,
  input  logic [63:0] mideleg,
  input  logic [63:0] hedeleg,
  input  logic [63:0] hideleg,
  output priv_mode_t  target,     // MODE_M, MODE_HS or MODE_VS
  output logic [5:0]  target_code // cause code as written to the handler's xcause
);
  logic to_s, to_vs;

  always_comb begin
    to_s   = (cur.prv != PRV_M) && (is_int ? mideleg[code] : medeleg[code]);
    to_vs  = to_s && cur.v && (is_int ? hideleg[code] : hedeleg[code]);
    target = to_vs ? MODE_VS : (to_s ? MODE_HS : MODE_M);
    target_code = code;
    if (to_vs && is_int && (code == 6'd2 || code == 6'd6 || code == 6'd10))
      target_code = code - 6'd1;
  end
endmodule
