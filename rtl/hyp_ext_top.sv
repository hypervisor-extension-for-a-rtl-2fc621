// hyp_ext_top: the hypervisor extension of a 64-bit RISC-V hart.
//
// It gathers the parts a core needs to run guests: the privilege mode with
// its V bit (M, HS, U, VS, VU), the CSR file with the hypervisor and VS
// registers, trap delegation to M, HS or VS, and a two-stage MMU made of a
// TLB and a page-table walker. The core pipeline itself is outside: it
// presents CSR instructions, traps, MRET/SRET, fences and address
// translations on the ports below, and the walker reads page tables through
// a memory read port.
//
// Translation (tr_*): tr_valid/tr_ready (ready in idle) hands over a virtual
// address and access type. The translation regime follows the current mode:
// M is Bare (no MPRV); HS and U use satp (Bare or Sv39); VS and VU use vsatp
// and hgatp. The TLB is looked up the cycle after the request; a hit answers
// then (tr_done two cycles after the request), a miss starts the walker and
// fills the TLB from its result. Every answer, hit or walk, passes through
// the same permission check. tr_done pulses with tr_paddr, or with tr_exc and
// the cause (page fault 12/13/15, guest page fault 20/21/23), tr_gpa (the
// guest-physical address for htval/mtval2, zero unless a guest page fault) and tr_gva (tval is a guest
// virtual address); the core feeds these into a trap.
//
// Fences (at most one per cycle, not during a walk): sfence_vma from HS
// flushes native TLB entries; from VS or VU it acts on the guest's entries
// (as HFENCE.VVMA); hfence_vvma and hfence_gvma flush guest entries. rs1 and
// rs2 narrow them by address and ASID/VMID when their *_use flags are set.
//
// The split into privilege mode, CSRs, trap handling, PTW and TLB is the
// paper's; the ports, the one-walk-at-a-time sequencing and the TLB size are
// this design's choices.
module hyp_ext_top
  import hyp_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // CSR instruction
  input  logic              csr_valid,
  input  csr_op_e           csr_op,
  input  logic [11:0]       csr_addr,
  input  logic [63:0]       csr_wdata,
  output logic [63:0]       csr_rdata,
  output logic              csr_illegal,
  output logic              csr_virtual,
  // trap
  input  logic              trap_valid,
  input  logic              trap_is_int,
  input  logic [5:0]        trap_code,
  input  logic [63:0]       trap_epc,
  input  logic [63:0]       trap_tval,
  input  logic [63:0]       trap_gpa,
  input  logic              trap_gva,
  output priv_mode_t        trap_target,
  output logic [63:0]       trap_pc,
  // MRET / SRET
  input  logic              mret,
  input  logic              sret,
  output logic [63:0]       ret_pc,
  output priv_mode_t        mode,
  // fences
  input  logic              sfence_vma,
  input  logic              hfence_vvma,
  input  logic              hfence_gvma,
  input  logic              fence_use_addr,
  input  logic [63:0]       fence_addr,     // rs1 (a guest-physical address >> 2 for HFENCE.GVMA)
  input  logic              fence_use_id,
  input  logic [15:0]       fence_id,       // rs2: ASID, or VMID for HFENCE.GVMA
  // address translation
  input  logic              tr_valid,
  output logic              tr_ready,
  input  logic [63:0]       tr_vaddr,
  input  acc_e              tr_acc,
  output logic              tr_done,
  output logic [PA_W-1:0]   tr_paddr,
  output logic              tr_exc,
  output logic [5:0]        tr_cause,
  output logic [GPA_W-1:0]  tr_gpa,
  output logic              tr_gva,
  output logic              tr_tlb_hit,    // the answer came from the TLB
  // page-table memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [PA_W-1:0]   mem_req_addr,
  input  logic              mem_resp_valid,
  input  logic [63:0]       mem_resp_data
);
  // ---- CSRs, mode, delegation -----------------------------------------------
  logic [63:0] satp, vsatp, hgatp, mstatus, vsstatus;

  hyp_csr_file u_csr (
    .clk, .rst_n,
    .csr_valid, .csr_op, .csr_addr, .csr_wdata, .csr_rdata, .csr_illegal, .csr_virtual,
    .trap_valid, .trap_is_int, .trap_code, .trap_epc, .trap_tval, .trap_gpa, .trap_gva,
    .trap_target, .trap_pc,
    .mret, .sret, .ret_pc,
    .mode, .satp, .vsatp, .hgatp, .mstatus, .vsstatus
  );

  // ---- translation sequencing -------------------------------------------------
  typedef enum logic [1:0] { T_IDLE, T_LOOKUP, T_WALK } tstate_e;
  tstate_e            ts_q;
  logic [63:0]        va_q;
  acc_e               acc_q;

  // regime of the current mode
  logic              virt, bare, eff_u, sum, mxr, mxr_g;
  logic [ASID_W-1:0] asid;
  logic [VMID_W-1:0] vmid;
  always_comb begin
    virt  = mode.v;
    bare  = (mode.prv == PRV_M) || (!mode.v && satp[63:60] != ATP_SV39);
    eff_u = (mode.prv == PRV_U);
    asid  = virt ? vsatp[59:44] : satp[59:44];
    vmid  = hgatp[57:44];
    sum   = virt ? vsstatus[ST_SUM] : mstatus[ST_SUM];
    mxr   = (virt && vsstatus[ST_MXR]) || mstatus[ST_MXR];
    mxr_g = mstatus[ST_MXR];
  end

  // ---- TLB ----------------------------------------------------------------------
  logic        lk_hit;
  xlat_t       lk_xlat;
  logic        fl_valid;
  logic [1:0]  fl_kind;
  logic [TAG_W-1:0] fl_vpn;
  logic        ptw_done;
  flt_e        ptw_fault;
  logic [GPA_W-1:0] ptw_fault_gpa;
  logic        ptw_fault_final;
  xlat_t       ptw_xlat;
  logic        fill;

  always_comb begin
    fl_valid = sfence_vma || hfence_vvma || hfence_gvma;
    fl_kind  = hfence_gvma ? 2'd2 : ((hfence_vvma || (sfence_vma && virt)) ? 2'd1 : 2'd0);
    fl_vpn   = hfence_gvma ? fence_addr[TAG_W+9:10]    // rs1 holds GPA >> 2
                           : fence_addr[GPA_W-1:12];
  end

  assign fill = (ts_q == T_WALK) && ptw_done && (ptw_fault == FLT_NONE);

  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_vpn     (va_q[GPA_W-1:12]),
    .lk_virt    (virt),
    .lk_asid    (asid),
    .lk_vmid    (vmid),
    .lk_hit     (lk_hit),
    .lk_xlat    (lk_xlat),
    .fill_valid (fill),
    .fill_vpn   (va_q[GPA_W-1:12]),
    .fill_virt  (virt),
    .fill_asid  (asid),
    .fill_vmid  (vmid),
    .fill_xlat  (ptw_xlat),
    .fl_valid   (fl_valid),
    .fl_kind    (fl_kind),
    .fl_use_addr(fence_use_addr),
    .fl_vpn     (fl_vpn),
    .fl_use_asid(fence_use_id && !hfence_gvma),
    .fl_asid    (fence_id),
    .fl_use_vmid(hfence_gvma ? fence_use_id : 1'b1),
    .fl_vmid    (hfence_gvma ? fence_id[VMID_W-1:0] : vmid)
  );

  // ---- page-table walker --------------------------------------------------------
  logic ptw_req_ready;

  ptw_2stage u_ptw (
    .clk, .rst_n,
    .req_valid     ((ts_q == T_LOOKUP) && !bare && !lk_hit),
    .req_ready     (ptw_req_ready),
    .req_vaddr     (va_q),
    .req_virt      (virt),
    .satp, .vsatp, .hgatp,
    .done          (ptw_done),
    .fault         (ptw_fault),
    .fault_gpa     (ptw_fault_gpa),
    .fault_final   (ptw_fault_final),
    .xlat          (ptw_xlat),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_data
  );

  // ---- answer ---------------------------------------------------------------------
  xlat_t t, t1;
  flt_e  f;
  always_comb begin
    t = (ts_q == T_WALK) ? ptw_xlat : lk_xlat;
    f = perm_check(t, acc_q, eff_u, sum, mxr, mxr_g);
    t1       = t;
    t1.s2_en = 1'b0;
    if (ts_q == T_WALK && ptw_fault != FLT_NONE) begin
      f = ptw_fault;
      // the VS-stage leaf's permissions are checked before the G-stage
      // translation of the final GPA, so their page fault takes priority
      if (ptw_fault == FLT_GUEST && ptw_fault_final) begin
        if (perm_check(t1, acc_q, eff_u, sum, mxr, mxr_g) == FLT_PAGE) f = FLT_PAGE;
      end
    end

    tr_done    = 1'b0;
    tr_tlb_hit = 1'b0;
    if (ts_q == T_LOOKUP && (bare || lk_hit)) begin
      tr_done    = 1'b1;
      tr_tlb_hit = !bare;
    end
    if (ts_q == T_WALK && ptw_done) tr_done = 1'b1;

    if (ts_q == T_LOOKUP && bare) begin
      f        = FLT_NONE;
      tr_paddr = va_q[PA_W-1:0];
    end else begin
      tr_paddr = {t.ppn[PA_W-13:0], va_q[11:0]};
    end
    tr_exc   = tr_done && (f != FLT_NONE);
    tr_cause = fault_cause(f, acc_q);
    tr_gva   = virt;
    if (f != FLT_GUEST)                           tr_gpa = '0;
    else if (ts_q == T_WALK && ptw_fault == FLT_GUEST) tr_gpa = ptw_fault_gpa;
    else                                          tr_gpa = {t.gppn, va_q[11:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts_q  <= T_IDLE;
      va_q  <= '0;
      acc_q <= ACC_LOAD;
    end else begin
      unique case (ts_q)
        T_IDLE: if (tr_valid) begin
          va_q  <= tr_vaddr;
          acc_q <= tr_acc;
          ts_q  <= T_LOOKUP;
        end
        T_LOOKUP: begin
          if (bare || lk_hit) ts_q <= T_IDLE;
          else if (ptw_req_ready) ts_q <= T_WALK;
        end
        T_WALK: if (ptw_done) ts_q <= T_IDLE;
        default: ts_q <= T_IDLE;
      endcase
    end
  end

  assign tr_ready = (ts_q == T_IDLE);

  // the core changes neither mode nor translation CSRs during a translation,
  // and fences only between translations
  a_fence_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 fl_valid |-> ts_q == T_IDLE)
    else $error("hyp_ext_top: fence during a translation");
endmodule
