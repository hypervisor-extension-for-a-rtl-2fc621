// priv_mode_reg: the current privilege mode of the hart.
//
// The hypervisor extension adds the virtualization bit V to the M/S/U
// privilege level, giving five modes: M, HS (S with V=0), U, VS (S with V=1,
// the guest kernel) and VU (U with V=1, guest user code). This register holds
// {V, level}, resets to M, and moves on three events, one per cycle:
//   trap  -> the handler mode chosen by trap_deleg (M, HS or VS);
//   MRET  -> level from mstatus.MPP, V from mstatus.MPV (V=0 if MPP is M);
//   SRET  -> with V=1: VS or VU from vsstatus.SPP, V stays 1;
//            with V=0: HS or U from sstatus.SPP, V from hstatus.SPV.
// The modes come from the paper; the return rules are the hypervisor
// specification's. The new mode is visible the cycle after the event.
module priv_mode_reg
  import hyp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       trap_valid,
  input  priv_mode_t trap_target,
  input  logic       mret,
  input  logic       sret,
  input  priv_lvl_e  mpp,      // mstatus.MPP
  input  logic       mpv,      // mstatus.MPV
  input  logic       spp,      // mstatus.SPP (HS-level sstatus)
  input  logic       spv,      // hstatus.SPV
  input  logic       vs_spp,   // vsstatus.SPP
  output priv_mode_t mode
);
  priv_mode_t mode_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_M;
    end else if (trap_valid) begin
      mode_q <= trap_target;
    end else if (mret) begin
      mode_q.prv <= mpp;
      mode_q.v   <= (mpp == PRV_M) ? 1'b0 : mpv;
    end else if (sret) begin
      if (mode_q.v) begin
        mode_q.prv <= vs_spp ? PRV_S : PRV_U;
      end else begin
        mode_q.prv <= spp ? PRV_S : PRV_U;
        mode_q.v   <= spv;
      end
    end
  end

  assign mode = mode_q;

  // a trap and a return never retire in the same cycle
  a_one_event: assert property (@(posedge clk) disable iff (!rst_n)
                               !(trap_valid && (mret || sret)) && !(mret && sret))
    else $error("priv_mode_reg: more than one mode event in a cycle");
endmodule
