// hyp_csr_file: machine, supervisor, hypervisor and virtual-supervisor CSRs.
//
// The file holds the CSRs the hypervisor extension adds (hstatus, hedeleg,
// hideleg, hie/hip/hvip, htval, htinst, hgatp, htimedelta, hcounteren,
// hgeie, hgeip, henvcfg, mtval2, mtinst and the VS
// copies vsstatus, vsie, vstvec, vsscratch, vsepc, vscause, vstval, vsip,
// vsatp) next to the M and S registers they change (mstatus gains MPV and
// GVA). It owns the privilege-mode register and the trap-delegation logic, and
// updates the CSRs when a trap is taken or MRET/SRET executes.
//
// CSR access (one per cycle, csr_valid with op/addr/wdata): the read data and
// the exception flags are combinational; a legal write takes effect at the
// next clock edge. Rules, by mode:
//   M: every implemented CSR;   HS: S, H and VS CSRs (satp traps if mstatus.TVM);
//   U: none (illegal instruction);
//   VS: S addresses are redirected to the VS copies (satp -> vsatp, which
//       raises a virtual-instruction exception if hstatus.VTVM); H and VS
//       addresses raise a virtual-instruction exception;
//   VU: S, H and VS addresses raise a virtual-instruction exception;
//   M addresses from VS or VU, unimplemented addresses and writes to
//   read-only addresses raise an illegal-instruction exception.
// csr_op CSR_RD is a read with no write (CSRRS/CSRRC with rs1 = x0); it is
// the only legal access to a read-only CSR (address bits 11:10 = 11).
//
// Trap (trap_valid): trap_deleg picks M, HS or VS; that mode's epc, cause and
// tval are written, its status stack is pushed (xPIE<=xIE, xIE<=0, xPP<=old
// level), MPV or hstatus.SPV/SPVP record whether the trap came from a virtual
// mode, GVA records that tval holds a guest virtual address, and mtval2 or
// htval receives the faulting guest-physical address shifted right by 2.
// trap_pc is the handler address (vectored mode adds 4*cause for interrupts),
// valid in the same cycle. MRET/SRET pop the stacks; ret_pc is mepc, sepc or
// vsepc. The CSR set and update rules follow the hypervisor specification;
// the paper names these tasks without giving their details. Interrupts are
// not generated here: pending/enable bits are only stored, and mtinst/htinst
// are always written with zero on a trap, which the specification allows.
// With no guest external interrupt lines (GEILEN=0), hgeie, hgeip and
// hstatus.VGEIN read as zero; henvcfg reads as zero (none of its optional
// features exist). This hart has no counters, so htimedelta and hcounteren
// are only stored for the hypervisor to read back.
module hyp_csr_file
  import hyp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // CSR instruction
  input  logic        csr_valid,
  input  csr_op_e     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [63:0] csr_wdata,
  output logic [63:0] csr_rdata,
  output logic        csr_illegal,   // illegal-instruction exception
  output logic        csr_virtual,   // virtual-instruction exception
  // trap entry
  input  logic        trap_valid,
  input  logic        trap_is_int,
  input  logic [5:0]  trap_code,
  input  logic [63:0] trap_epc,
  input  logic [63:0] trap_tval,
  input  logic [63:0] trap_gpa,      // guest-physical address of a guest page fault
  input  logic        trap_gva,      // trap_tval is a guest virtual address
  output priv_mode_t  trap_target,
  output logic [63:0] trap_pc,
  // trap return
  input  logic        mret,
  input  logic        sret,
  output logic [63:0] ret_pc,
  // state seen by the rest of the hart
  output priv_mode_t  mode,
  output logic [63:0] satp,
  output logic [63:0] vsatp,
  output logic [63:0] hgatp,
  output logic [63:0] mstatus,
  output logic [63:0] vsstatus
);
  // ---- registers ----------------------------------------------------------
  logic [63:0] mstatus_q, medeleg_q, mideleg_q, mie_q, mip_q, mtvec_q;
  logic [63:0] mscratch_q, mepc_q, mcause_q, mtval_q, mtval2_q, mtinst_q;
  logic [63:0] stvec_q, sscratch_q, sepc_q, scause_q, stval_q, satp_q;
  logic [63:0] hstatus_q, hedeleg_q, hideleg_q, htval_q, htinst_q, hgatp_q;
  logic [63:0] htimedelta_q;
  logic [31:0] hcounteren_q;
  logic [63:0] vsstatus_q, vstvec_q, vsscratch_q, vsepc_q, vscause_q, vstval_q, vsatp_q;

  // writable-bit masks (WARL fields not listed read as zero)
  localparam logic [63:0] MSTATUS_WMASK  = 64'h0000_00C0_001C_19AA; // SIE MIE SPIE MPIE SPP MPP SUM MXR TVM GVA MPV
  localparam logic [63:0] SSTATUS_MASK   = 64'h0000_0003_000C_0122; // SIE SPIE SPP SUM MXR UXL
  localparam logic [63:0] SSTATUS_WMASK  = 64'h0000_0000_000C_0122;
  localparam logic [63:0] HSTATUS_WMASK  = 64'h0000_0000_0070_03C0; // GVA SPV SPVP HU VTVM VTW VTSR
  localparam logic [63:0] XLEN64_FIELDS  = 64'h0000_000A_0000_0000; // SXL=UXL=2 (mstatus)
  localparam logic [63:0] UXL64          = 64'h0000_0002_0000_0000; // UXL=2
  localparam logic [63:0] HSTATUS_VSXL64 = 64'h0000_0002_0000_0000; // VSXL=2
  localparam logic [63:0] MISA_VALUE     = 64'h8000_0000_0014_1185; // RV64 A C H I M S U
  localparam logic [63:0] MEDELEG_WMASK  = 64'h0000_0000_00F0_B7FF; // causes 0-10,12,13,15,20-23
  localparam logic [63:0] HEDELEG_WMASK  = 64'h0000_0000_0000_B1FF; // causes 0-8,12,13,15
  localparam logic [63:0] MIDELEG_WMASK  = 64'h0000_0000_0000_0222; // SSI STI SEI
  localparam logic [63:0] VS_INT_MASK    = 64'h0000_0000_0000_0444; // VSSI VSTI VSEI
  localparam logic [63:0] MIE_WMASK      = 64'h0000_0000_0000_0EEE;
  localparam logic [63:0] MIP_WMASK      = 64'h0000_0000_0000_0222; // SSIP STIP SEIP software-writable

  // ---- mode, delegation ---------------------------------------------------
  priv_mode_t cur;
  logic [5:0] tgt_code;

  trap_deleg u_deleg (
    .cur        (cur),
    .is_int     (trap_is_int),
    .code       (trap_code),
    .medeleg    (medeleg_q),
    .mideleg    (mideleg_q | VS_INT_MASK),  // VS interrupts are always delegated past M
    .hedeleg    (hedeleg_q),
    .hideleg    (hideleg_q),
    .target     (trap_target),
    .target_code(tgt_code)
  );

  priv_mode_reg u_mode (
    .clk        (clk),
    .rst_n      (rst_n),
    .trap_valid (trap_valid),
    .trap_target(trap_target),
    .mret       (mret),
    .sret       (sret),
    .mpp        (priv_lvl_e'(mstatus_q[ST_MPP +: 2])),
    .mpv        (mstatus_q[ST_MPV]),
    .spp        (mstatus_q[ST_SPP]),
    .spv        (hstatus_q[HS_SPV]),
    .vs_spp     (vsstatus_q[ST_SPP]),
    .mode       (cur)
  );

  // ---- access check and address redirection -------------------------------
  logic [11:0] eff_addr;   // address after VS redirection
  logic        exists, read_only, ro_write;

  always_comb begin
    eff_addr = csr_addr;
    if (cur.v && csr_addr[9:8] == 2'b01)
      eff_addr = {csr_addr[11:10], 2'b10, csr_addr[7:0]};   // 0x1xx -> 0x2xx
  end

  always_comb begin
    unique case (eff_addr)
      CSR_SSTATUS, CSR_SIE, CSR_STVEC, CSR_SSCRATCH, CSR_SEPC, CSR_SCAUSE,
      CSR_STVAL, CSR_SIP, CSR_SATP,
      CSR_VSSTATUS, CSR_VSIE, CSR_VSTVEC, CSR_VSSCRATCH, CSR_VSEPC,
      CSR_VSCAUSE, CSR_VSTVAL, CSR_VSIP, CSR_VSATP,
      CSR_MSTATUS, CSR_MISA, CSR_MEDELEG, CSR_MIDELEG, CSR_MIE, CSR_MTVEC,
      CSR_MSCRATCH, CSR_MEPC, CSR_MCAUSE, CSR_MTVAL, CSR_MIP, CSR_MTINST,
      CSR_MTVAL2,
      CSR_HSTATUS, CSR_HEDELEG, CSR_HIDELEG, CSR_HIE, CSR_HTVAL, CSR_HIP,
      CSR_HVIP, CSR_HTINST, CSR_HGATP, CSR_HTIMEDELTA, CSR_HCOUNTEREN,
      CSR_HGEIE, CSR_HENVCFG, CSR_HGEIP: exists = 1'b1;
      default: exists = 1'b0;
    endcase
    read_only = (csr_addr[11:10] == 2'b11);
    ro_write  = read_only && csr_op != CSR_RD;   // a write to a read-only CSR
  end

  always_comb begin
    csr_illegal = 1'b0;
    csr_virtual = 1'b0;
    if (csr_valid) begin
      if (!exists) begin
        csr_illegal = 1'b1;
      end else if (cur.prv == PRV_M) begin
        csr_illegal = ro_write;
      end else if (!cur.v) begin
        if (cur.prv == PRV_U || csr_addr[9:8] == 2'b11)
          csr_illegal = 1'b1;
        else if (csr_addr == CSR_SATP && mstatus_q[ST_TVM])
          csr_illegal = 1'b1;
        else
          csr_illegal = ro_write;
      end else begin
        if (csr_addr[9:8] == 2'b11)
          csr_illegal = 1'b1;
        else if (csr_addr[9:8] == 2'b10 || cur.prv == PRV_U)
          csr_virtual = 1'b1;
        else if (csr_addr == CSR_SATP && hstatus_q[HS_VTVM])
          csr_virtual = 1'b1;
        else
          csr_illegal = ro_write;
      end
    end
  end

  // ---- read mux -------------------------------------------------------------
  logic [63:0] mstatus_rd, mip_rd;
  always_comb begin
    mstatus_rd = (mstatus_q & MSTATUS_WMASK) | XLEN64_FIELDS;
    mip_rd     = mip_q;
    csr_rdata  = '0;
    unique case (eff_addr)
      CSR_SSTATUS:   csr_rdata = mstatus_rd & SSTATUS_MASK;
      CSR_SIE:       csr_rdata = mie_q & mideleg_q;
      CSR_STVEC:     csr_rdata = stvec_q;
      CSR_SSCRATCH:  csr_rdata = sscratch_q;
      CSR_SEPC:      csr_rdata = sepc_q;
      CSR_SCAUSE:    csr_rdata = scause_q;
      CSR_STVAL:     csr_rdata = stval_q;
      CSR_SIP:       csr_rdata = mip_rd & mideleg_q;
      CSR_SATP:      csr_rdata = satp_q;
      CSR_VSSTATUS:  csr_rdata = (vsstatus_q & SSTATUS_WMASK) | UXL64;
      CSR_VSIE:      csr_rdata = (mie_q & hideleg_q & VS_INT_MASK) >> 1;
      CSR_VSTVEC:    csr_rdata = vstvec_q;
      CSR_VSSCRATCH: csr_rdata = vsscratch_q;
      CSR_VSEPC:     csr_rdata = vsepc_q;
      CSR_VSCAUSE:   csr_rdata = vscause_q;
      CSR_VSTVAL:    csr_rdata = vstval_q;
      CSR_VSIP:      csr_rdata = (mip_rd & hideleg_q & VS_INT_MASK) >> 1;
      CSR_VSATP:     csr_rdata = vsatp_q;
      CSR_MSTATUS:   csr_rdata = mstatus_rd;
      CSR_MISA:      csr_rdata = MISA_VALUE;
      CSR_MEDELEG:   csr_rdata = medeleg_q;
      CSR_MIDELEG:   csr_rdata = mideleg_q | VS_INT_MASK;
      CSR_MIE:       csr_rdata = mie_q;
      CSR_MTVEC:     csr_rdata = mtvec_q;
      CSR_MSCRATCH:  csr_rdata = mscratch_q;
      CSR_MEPC:      csr_rdata = mepc_q;
      CSR_MCAUSE:    csr_rdata = mcause_q;
      CSR_MTVAL:     csr_rdata = mtval_q;
      CSR_MIP:       csr_rdata = mip_rd;
      CSR_MTINST:    csr_rdata = mtinst_q;
      CSR_MTVAL2:    csr_rdata = mtval2_q;
      CSR_HSTATUS:   csr_rdata = (hstatus_q & HSTATUS_WMASK) | HSTATUS_VSXL64;
      CSR_HEDELEG:   csr_rdata = hedeleg_q;
      CSR_HIDELEG:   csr_rdata = hideleg_q;
      CSR_HIE:       csr_rdata = mie_q & VS_INT_MASK;
      CSR_HTVAL:     csr_rdata = htval_q;
      CSR_HIP:       csr_rdata = mip_rd & VS_INT_MASK;
      CSR_HVIP:      csr_rdata = mip_rd & VS_INT_MASK;
      CSR_HTINST:    csr_rdata = htinst_q;
      CSR_HGATP:     csr_rdata = hgatp_q;
      CSR_HTIMEDELTA: csr_rdata = htimedelta_q;
      CSR_HCOUNTEREN: csr_rdata = {32'd0, hcounteren_q};
      CSR_HGEIE, CSR_HENVCFG, CSR_HGEIP: csr_rdata = '0;
      default:       csr_rdata = '0;
    endcase
  end

  // value an instruction writes: RW replaces, RS sets, RC clears bits
  logic [63:0] wval;
  logic        do_write;
  always_comb begin
    unique case (csr_op)
      CSR_RS:  wval = csr_rdata | csr_wdata;
      CSR_RC:  wval = csr_rdata & ~csr_wdata;
      default: wval = csr_wdata;
    endcase
    do_write = csr_valid && !csr_illegal && !csr_virtual && !read_only && csr_op != CSR_RD;
  end

  // satp-like registers accept only Bare and Sv39 (WARL): other modes are ignored
  function automatic logic atp_mode_ok(logic [63:0] v);
    return v[63:60] == ATP_BARE || v[63:60] == ATP_SV39;
  endfunction

  // ---- trap vector and return address ---------------------------------------
  logic [63:0] tvec;
  always_comb begin
    unique case (trap_target)
      MODE_M:  tvec = mtvec_q;
      MODE_HS: tvec = stvec_q;
      default: tvec = vstvec_q;
    endcase
    trap_pc = {tvec[63:2], 2'b00};
    if (tvec[0] && trap_is_int)
      trap_pc = {tvec[63:2], 2'b00} + {56'd0, tgt_code, 2'b00};
    ret_pc = mret ? mepc_q : (cur.v ? vsepc_q : sepc_q);
  end

  // ---- state update -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mstatus_q  <= '0;   mstatus_q[ST_MPP +: 2] <= PRV_M;
      medeleg_q  <= '0;   mideleg_q  <= '0;   mie_q     <= '0;  mip_q    <= '0;
      mtvec_q    <= '0;   mscratch_q <= '0;   mepc_q    <= '0;  mcause_q <= '0;
      mtval_q    <= '0;   mtval2_q   <= '0;   mtinst_q  <= '0;
      stvec_q    <= '0;   sscratch_q <= '0;   sepc_q    <= '0;  scause_q <= '0;
      stval_q    <= '0;   satp_q     <= '0;
      hstatus_q  <= '0;   hedeleg_q  <= '0;   hideleg_q <= '0;  htval_q  <= '0;
      htinst_q   <= '0;   hgatp_q    <= '0;
      htimedelta_q <= '0; hcounteren_q <= '0;
      vsstatus_q <= '0;   vstvec_q   <= '0;   vsscratch_q <= '0; vsepc_q <= '0;
      vscause_q  <= '0;   vstval_q   <= '0;   vsatp_q   <= '0;
    end else if (trap_valid) begin
      unique case (trap_target)
        MODE_M: begin
          mepc_q   <= trap_epc;
          mcause_q <= {trap_is_int, 57'd0, trap_code};
          mtval_q  <= trap_tval;
          mtval2_q <= trap_gpa >> 2;
          mtinst_q <= '0;
          mstatus_q[ST_MPIE]      <= mstatus_q[ST_MIE];
          mstatus_q[ST_MIE]       <= 1'b0;
          mstatus_q[ST_MPP +: 2]  <= cur.prv;
          mstatus_q[ST_MPV]       <= cur.v;
          mstatus_q[ST_GVA]       <= trap_gva;
        end
        MODE_HS: begin
          sepc_q   <= trap_epc;
          scause_q <= {trap_is_int, 57'd0, trap_code};
          stval_q  <= trap_tval;
          htval_q  <= trap_gpa >> 2;
          htinst_q <= '0;
          mstatus_q[ST_SPIE] <= mstatus_q[ST_SIE];
          mstatus_q[ST_SIE]  <= 1'b0;
          mstatus_q[ST_SPP]  <= (cur.prv == PRV_S);
          hstatus_q[HS_SPV]  <= cur.v;
          if (cur.v) hstatus_q[HS_SPVP] <= (cur.prv == PRV_S);
          hstatus_q[HS_GVA]  <= trap_gva;
        end
        default: begin
          vsepc_q   <= trap_epc;
          vscause_q <= {trap_is_int, 57'd0, tgt_code};
          vstval_q  <= trap_tval;
          vsstatus_q[ST_SPIE] <= vsstatus_q[ST_SIE];
          vsstatus_q[ST_SIE]  <= 1'b0;
          vsstatus_q[ST_SPP]  <= (cur.prv == PRV_S);
        end
      endcase
    end else if (mret) begin
      mstatus_q[ST_MIE]      <= mstatus_q[ST_MPIE];
      mstatus_q[ST_MPIE]     <= 1'b1;
      mstatus_q[ST_MPP +: 2] <= PRV_U;
      mstatus_q[ST_MPV]      <= 1'b0;
    end else if (sret) begin
      if (cur.v) begin
        vsstatus_q[ST_SIE]  <= vsstatus_q[ST_SPIE];
        vsstatus_q[ST_SPIE] <= 1'b1;
        vsstatus_q[ST_SPP]  <= 1'b0;
      end else begin
        mstatus_q[ST_SIE]  <= mstatus_q[ST_SPIE];
        mstatus_q[ST_SPIE] <= 1'b1;
        mstatus_q[ST_SPP]  <= 1'b0;
        hstatus_q[HS_SPV]  <= 1'b0;
      end
    end else if (do_write) begin
      unique case (eff_addr)
        CSR_SSTATUS:   mstatus_q <= (mstatus_q & ~SSTATUS_WMASK) | (wval & SSTATUS_WMASK);
        CSR_SIE:       mie_q     <= (mie_q & ~mideleg_q) | (wval & mideleg_q & MIE_WMASK);
        CSR_STVEC:     stvec_q   <= wval;
        CSR_SSCRATCH:  sscratch_q <= wval;
        CSR_SEPC:      sepc_q    <= {wval[63:1], 1'b0};
        CSR_SCAUSE:    scause_q  <= wval;
        CSR_STVAL:     stval_q   <= wval;
        CSR_SIP:       mip_q     <= (mip_q & ~(mideleg_q & 64'h2)) | (wval & mideleg_q & 64'h2);
        CSR_SATP:      if (atp_mode_ok(wval)) satp_q <= wval;
        CSR_VSSTATUS:  vsstatus_q <= wval & SSTATUS_WMASK;
        CSR_VSIE:      mie_q     <= (mie_q & ~(hideleg_q & VS_INT_MASK)) | ((wval << 1) & hideleg_q & VS_INT_MASK);
        CSR_VSTVEC:    vstvec_q  <= wval;
        CSR_VSSCRATCH: vsscratch_q <= wval;
        CSR_VSEPC:     vsepc_q   <= {wval[63:1], 1'b0};
        CSR_VSCAUSE:   vscause_q <= wval;
        CSR_VSTVAL:    vstval_q  <= wval;
        CSR_VSIP:      mip_q     <= (mip_q & ~(hideleg_q & 64'h4)) | ((wval << 1) & hideleg_q & 64'h4);
        CSR_VSATP:     if (atp_mode_ok(wval)) vsatp_q <= wval;
        CSR_MSTATUS: begin
          mstatus_q <= wval & MSTATUS_WMASK;
          if (wval[ST_MPP +: 2] == 2'b10)          // reserved level: MPP keeps its value
            mstatus_q[ST_MPP +: 2] <= mstatus_q[ST_MPP +: 2];
        end
        CSR_MEDELEG:   medeleg_q <= wval & MEDELEG_WMASK;
        CSR_MIDELEG:   mideleg_q <= wval & MIDELEG_WMASK;
        CSR_MIE:       mie_q     <= wval & MIE_WMASK;
        CSR_MTVEC:     mtvec_q   <= {wval[63:2], 1'b0, wval[0]};
        CSR_MSCRATCH:  mscratch_q <= wval;
        CSR_MEPC:      mepc_q    <= {wval[63:1], 1'b0};
        CSR_MCAUSE:    mcause_q  <= wval;
        CSR_MTVAL:     mtval_q   <= wval;
        CSR_MIP:       mip_q     <= (mip_q & ~(MIP_WMASK | VS_INT_MASK)) | (wval & (MIP_WMASK | VS_INT_MASK));
        CSR_MTINST:    mtinst_q  <= wval;
        CSR_MTVAL2:    mtval2_q  <= wval;
        CSR_HSTATUS:   hstatus_q <= wval & HSTATUS_WMASK;
        CSR_HEDELEG:   hedeleg_q <= wval & HEDELEG_WMASK;
        CSR_HIDELEG:   hideleg_q <= wval & VS_INT_MASK;
        CSR_HIE:       mie_q     <= (mie_q & ~VS_INT_MASK) | (wval & VS_INT_MASK);
        CSR_HTVAL:     htval_q   <= wval;
        CSR_HIP:       mip_q     <= (mip_q & ~64'h4) | (wval & 64'h4);
        CSR_HVIP:      mip_q     <= (mip_q & ~VS_INT_MASK) | (wval & VS_INT_MASK);
        CSR_HTINST:    htinst_q  <= wval;
        CSR_HTIMEDELTA: htimedelta_q <= wval;
        CSR_HCOUNTEREN: hcounteren_q <= wval[31:0];
        CSR_HGATP:     if (atp_mode_ok(wval)) hgatp_q <= {wval[63:60], 2'b00, wval[57:2], 2'b00}; // 16 KiB-aligned root
        default: ;
      endcase
    end
  end

  assign mode     = cur;
  assign satp     = satp_q;
  assign vsatp    = vsatp_q;
  assign hgatp    = hgatp_q;
  assign mstatus  = mstatus_rd;
  assign vsstatus = (vsstatus_q & SSTATUS_WMASK) | UXL64;
endmodule
