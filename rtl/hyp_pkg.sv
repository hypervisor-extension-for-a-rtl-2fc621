// hyp_pkg: types and constants shared by the hypervisor-extension blocks.
//
// It fixes the Sv39 geometry used by the address translation (a 39-bit
// virtual address split into three 9-bit VPN fields and a 12-bit page offset,
// 44-bit PPNs, three page-table levels, 4 KiB / 2 MiB / 1 GiB pages), the
// Sv39x4 widening of the guest-physical address to 41 bits that the second
// (G-) stage of the two-stage translation walks, the five privilege modes
// (M, HS, U, VS, VU) as a privilege level plus the virtualization bit V, the
// page-table-entry layout, the CSR addresses implemented and the exception
// cause codes. The Sv39 numbers follow the paper's translation figure; the
// Sv39x4 width, CSR numbers, field positions and cause codes are those of the
// RISC-V privileged and hypervisor specifications, which the design follows.
package hyp_pkg;

  // ---- Sv39 geometry ------------------------------------------------------
  localparam int unsigned XLEN      = 64;
  localparam int unsigned LEVELS    = 3;   // up to three page-table levels
  localparam int unsigned VPN_W     = 9;   // bits per VPN field
  localparam int unsigned OFFSET_W  = 12;  // 4 KiB page offset
  localparam int unsigned PPN_W     = 44;  // satp.PPN / PTE.PPN width
  localparam int unsigned VA_W      = 39;  // significant virtual-address bits
  localparam int unsigned GPA_W     = 41;  // Sv39x4 guest-physical address
  localparam int unsigned PA_W      = 56;  // physical address
  localparam int unsigned TAG_W     = GPA_W - OFFSET_W; // 29-bit page-number tag
  localparam int unsigned ASID_W    = 16;
  localparam int unsigned VMID_W    = 14;

  // ---- privilege modes ----------------------------------------------------
  typedef enum logic [1:0] {
    PRV_U = 2'd0,
    PRV_S = 2'd1,
    PRV_M = 2'd3
  } priv_lvl_e;

  // {V, level}: V=0,S is HS; V=1,S is VS; V=1,U is VU.
  typedef struct packed {
    logic      v;
    priv_lvl_e prv;
  } priv_mode_t;

  localparam priv_mode_t MODE_M  = '{v: 1'b0, prv: PRV_M};
  localparam priv_mode_t MODE_HS = '{v: 1'b0, prv: PRV_S};
  localparam priv_mode_t MODE_U  = '{v: 1'b0, prv: PRV_U};
  localparam priv_mode_t MODE_VS = '{v: 1'b1, prv: PRV_S};
  localparam priv_mode_t MODE_VU = '{v: 1'b1, prv: PRV_U};

  // ---- page-table entry ---------------------------------------------------
  typedef struct packed {
    logic [9:0]       hi;   // N, PBMT, reserved: must be zero here
    logic [PPN_W-1:0] ppn;
    logic [1:0]       rsw;
    logic             d, a, g, u, x, w, r, v;
  } pte_t;

  // satp / vsatp / hgatp share MODE[63:60] and PPN[43:0]
  localparam logic [3:0] ATP_BARE = 4'd0;
  localparam logic [3:0] ATP_SV39 = 4'd8;   // Sv39 (satp, vsatp) or Sv39x4 (hgatp)

  // ---- memory access type of a translation -------------------------------
  typedef enum logic [1:0] {
    ACC_LOAD  = 2'd0,
    ACC_STORE = 2'd1,
    ACC_FETCH = 2'd2
  } acc_e;

  typedef enum logic [1:0] {
    FLT_NONE  = 2'd0,
    FLT_PAGE  = 2'd1,   // VS-stage or single-stage page fault
    FLT_GUEST = 2'd2    // G-stage (guest) page fault
  } flt_e;

  // A finished translation, as the walker produces it and the TLB keeps it.
  // Page numbers are those of the 4 KiB page the walk was made for; size is
  // the page size the whole translation is valid for (0: 4 KiB, 1: 2 MiB,
  // 2: 1 GiB), the smaller of the two stages' leaf sizes.
  typedef struct packed {
    logic             s1_en;   // first stage (satp or vsatp) active
    logic             s2_en;   // G-stage active
    logic             r, w, x, u, g, d;   // first-stage leaf permissions
    logic             gr, gw, gx, gd;     // G-stage leaf permissions
    logic [1:0]       size;
    logic [PPN_W-1:0] ppn;     // host-physical page number
    logic [TAG_W-1:0] gppn;    // guest-physical page number
  } xlat_t;

  // ---- exception causes ---------------------------------------------------
  localparam logic [5:0] EXC_ILLEGAL_INST   = 6'd2;
  localparam logic [5:0] EXC_ECALL_U        = 6'd8;
  localparam logic [5:0] EXC_ECALL_HS       = 6'd9;
  localparam logic [5:0] EXC_ECALL_VS       = 6'd10;
  localparam logic [5:0] EXC_ECALL_M        = 6'd11;
  localparam logic [5:0] EXC_INST_PAGE      = 6'd12;
  localparam logic [5:0] EXC_LOAD_PAGE      = 6'd13;
  localparam logic [5:0] EXC_STORE_PAGE     = 6'd15;
  localparam logic [5:0] EXC_INST_GUEST     = 6'd20;
  localparam logic [5:0] EXC_LOAD_GUEST     = 6'd21;
  localparam logic [5:0] EXC_VIRTUAL_INST   = 6'd22;
  localparam logic [5:0] EXC_STORE_GUEST    = 6'd23;

  // ---- CSR addresses ------------------------------------------------------
  // CSR_RD: CSRRS/CSRRC with rs1 = x0 (or CSRRSI/CSRRCI with a zero
  // immediate), which reads without writing and so is legal on read-only CSRs
  typedef enum logic [1:0] {
    CSR_RD = 2'd0,
    CSR_RW = 2'd1,
    CSR_RS = 2'd2,
    CSR_RC = 2'd3
  } csr_op_e;

  localparam logic [11:0] CSR_SSTATUS   = 12'h100;
  localparam logic [11:0] CSR_SIE       = 12'h104;
  localparam logic [11:0] CSR_STVEC     = 12'h105;
  localparam logic [11:0] CSR_SSCRATCH  = 12'h140;
  localparam logic [11:0] CSR_SEPC      = 12'h141;
  localparam logic [11:0] CSR_SCAUSE    = 12'h142;
  localparam logic [11:0] CSR_STVAL     = 12'h143;
  localparam logic [11:0] CSR_SIP       = 12'h144;
  localparam logic [11:0] CSR_SATP      = 12'h180;
  localparam logic [11:0] CSR_VSSTATUS  = 12'h200;
  localparam logic [11:0] CSR_VSIE      = 12'h204;
  localparam logic [11:0] CSR_VSTVEC    = 12'h205;
  localparam logic [11:0] CSR_VSSCRATCH = 12'h240;
  localparam logic [11:0] CSR_VSEPC     = 12'h241;
  localparam logic [11:0] CSR_VSCAUSE   = 12'h242;
  localparam logic [11:0] CSR_VSTVAL    = 12'h243;
  localparam logic [11:0] CSR_VSIP      = 12'h244;
  localparam logic [11:0] CSR_VSATP     = 12'h280;
  localparam logic [11:0] CSR_MSTATUS   = 12'h300;
  localparam logic [11:0] CSR_MISA      = 12'h301;
  localparam logic [11:0] CSR_MEDELEG   = 12'h302;
  localparam logic [11:0] CSR_MIDELEG   = 12'h303;
  localparam logic [11:0] CSR_MIE       = 12'h304;
  localparam logic [11:0] CSR_MTVEC     = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH  = 12'h340;
  localparam logic [11:0] CSR_MEPC      = 12'h341;
  localparam logic [11:0] CSR_MCAUSE    = 12'h342;
  localparam logic [11:0] CSR_MTVAL     = 12'h343;
  localparam logic [11:0] CSR_MIP       = 12'h344;
  localparam logic [11:0] CSR_MTINST    = 12'h34A;
  localparam logic [11:0] CSR_MTVAL2    = 12'h34B;
  localparam logic [11:0] CSR_HSTATUS   = 12'h600;
  localparam logic [11:0] CSR_HEDELEG   = 12'h602;
  localparam logic [11:0] CSR_HIDELEG   = 12'h603;
  localparam logic [11:0] CSR_HIE       = 12'h604;
  localparam logic [11:0] CSR_HTVAL     = 12'h643;
  localparam logic [11:0] CSR_HIP       = 12'h644;
  localparam logic [11:0] CSR_HVIP      = 12'h645;
  localparam logic [11:0] CSR_HTINST    = 12'h64A;
  localparam logic [11:0] CSR_HGATP     = 12'h680;
  localparam logic [11:0] CSR_HTIMEDELTA = 12'h605;
  localparam logic [11:0] CSR_HCOUNTEREN = 12'h606;
  localparam logic [11:0] CSR_HGEIE     = 12'h607;
  localparam logic [11:0] CSR_HENVCFG   = 12'h60A;
  localparam logic [11:0] CSR_HGEIP     = 12'hE12;

  // ---- status-register bit positions --------------------------------------
  localparam int unsigned ST_SIE  = 1;
  localparam int unsigned ST_MIE  = 3;
  localparam int unsigned ST_SPIE = 5;
  localparam int unsigned ST_MPIE = 7;
  localparam int unsigned ST_SPP  = 8;
  localparam int unsigned ST_MPP  = 11;  // two bits, 12:11
  localparam int unsigned ST_SUM  = 18;
  localparam int unsigned ST_MXR  = 19;
  localparam int unsigned ST_TVM  = 20;
  localparam int unsigned ST_GVA  = 38;  // mstatus.GVA
  localparam int unsigned ST_MPV  = 39;  // mstatus.MPV
  localparam int unsigned HS_GVA  = 6;   // hstatus fields
  localparam int unsigned HS_SPV  = 7;
  localparam int unsigned HS_SPVP = 8;
  localparam int unsigned HS_VTVM = 20;

  // Permission check of a finished translation against one access.
  // eff_u: the access is made at user level (U or VU). sum/mxr: the
  // first-stage SUM and MXR bits (vsstatus when V=1, with mstatus.MXR ORed
  // in). mxr_g: mstatus.MXR, used for the G-stage. A first-stage failure is a
  // page fault; a G-stage failure a guest page fault. A store needs the dirty
  // bit set in each active stage (no hardware A/D update).
  function automatic flt_e perm_check(xlat_t t, acc_e acc, logic eff_u,
                                      logic sum, logic mxr, logic mxr_g);
    logic s1_ok, s2_ok;
    s1_ok = 1'b1;
    if (t.s1_en) begin
      if (eff_u && !t.u) s1_ok = 1'b0;
      if (!eff_u && t.u && (!sum || acc == ACC_FETCH)) s1_ok = 1'b0;
      unique case (acc)
        ACC_FETCH: if (!t.x) s1_ok = 1'b0;
        ACC_LOAD:  if (!(t.r || (mxr && t.x))) s1_ok = 1'b0;
        ACC_STORE: if (!(t.w && t.d)) s1_ok = 1'b0;
        default:   s1_ok = 1'b0;
      endcase
    end
    s2_ok = 1'b1;
    if (t.s2_en) begin
      unique case (acc)
        ACC_FETCH: if (!t.gx) s2_ok = 1'b0;
        ACC_LOAD:  if (!(t.gr || (mxr_g && t.gx))) s2_ok = 1'b0;
        ACC_STORE: if (!(t.gw && t.gd)) s2_ok = 1'b0;
        default:   s2_ok = 1'b0;
      endcase
    end
    if (!s1_ok)      return FLT_PAGE;
    else if (!s2_ok) return FLT_GUEST;
    else             return FLT_NONE;
  endfunction

  // Cause code of a translation fault for an access type.
  function automatic logic [5:0] fault_cause(flt_e f, acc_e acc);
    if (f == FLT_GUEST)
      return (acc == ACC_FETCH) ? EXC_INST_GUEST :
             (acc == ACC_STORE) ? EXC_STORE_GUEST : EXC_LOAD_GUEST;
    else
      return (acc == ACC_FETCH) ? EXC_INST_PAGE :
             (acc == ACC_STORE) ? EXC_STORE_PAGE : EXC_LOAD_PAGE;
  endfunction

endpackage
