// tlb: fully associative translation look-aside buffer for native and guest
// translations.
//
// Each entry holds one finished translation (xlat_t: host PPN, guest PPN,
// first-stage and G-stage permissions, page size) under a tag made of the
// page number, the address-space ID, the virtual-machine ID and a V bit that
// separates guest translations (GVA -> HPA through both stages) from native
// ones (VA -> PA through satp). A native entry matches on V=0 and its ASID
// (or its G bit); a guest entry matches on V=1, its VMID and its ASID (or G).
// The page size decides how many low page-number bits take part in the match.
// On a hit, the PPN and guest PPN of the addressed 4 KiB page are rebuilt
// from the entry and those low bits.
//
// Lookup is combinational (hit and entry in the same cycle as the request).
// A fill is written at the clock edge into the first invalid entry, or the
// round-robin victim. A flush invalidates, at the clock edge:
//   FL_S  (SFENCE.VMA from HS): native entries;
//   FL_VV (HFENCE.VVMA, or SFENCE.VMA from VS): guest entries of one VMID;
//   FL_GV (HFENCE.GVMA): guest entries, of one VMID if use_vmid;
// narrowed by address and by ASID when use_addr / use_asid are set (global
// entries survive an ASID-narrowed flush). The paper says the TLB keeps the
// translations for later use and must handle two-stage translation; the tag
// layout, size, replacement and fences are this design's choices.
module tlb
  import hyp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  logic [TAG_W-1:0]  lk_vpn,
  input  logic              lk_virt,
  input  logic [ASID_W-1:0] lk_asid,
  input  logic [VMID_W-1:0] lk_vmid,
  output logic              lk_hit,
  output xlat_t             lk_xlat,
  // fill
  input  logic              fill_valid,
  input  logic [TAG_W-1:0]  fill_vpn,
  input  logic              fill_virt,
  input  logic [ASID_W-1:0] fill_asid,
  input  logic [VMID_W-1:0] fill_vmid,
  input  xlat_t             fill_xlat,
  // flush
  input  logic              fl_valid,
  input  logic [1:0]        fl_kind,   // 0: FL_S, 1: FL_VV, 2: FL_GV
  input  logic              fl_use_addr,
  input  logic [TAG_W-1:0]  fl_vpn,
  input  logic              fl_use_asid,
  input  logic [ASID_W-1:0] fl_asid,
  input  logic              fl_use_vmid,
  input  logic [VMID_W-1:0] fl_vmid
);
  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam logic [1:0] FL_S = 2'd0, FL_VV = 2'd1, FL_GV = 2'd2;

  typedef struct packed {
    logic              valid;
    logic              virt;
    logic [ASID_W-1:0] asid;
    logic [VMID_W-1:0] vmid;
    logic [TAG_W-1:0]  vpn;
    xlat_t             xlat;
  } entry_t;

  entry_t           ent [ENTRIES];
  logic [IW-1:0]    rr_q;

  // low page-number bits ignored by a page of the given size
  function automatic logic [TAG_W-1:0] size_mask(logic [1:0] size);
    unique case (size)
      2'd2:    return {{(TAG_W-18){1'b1}}, 18'd0};
      2'd1:    return {{(TAG_W-9){1'b1}}, 9'd0};
      default: return '1;
    endcase
  endfunction

  function automatic logic vpn_match(entry_t e, logic [TAG_W-1:0] vpn);
    logic [TAG_W-1:0] m;
    m = size_mask(e.xlat.size);
    return ((e.vpn ^ vpn) & m) == '0;
  endfunction

  // ---- lookup ---------------------------------------------------------------
  logic [ENTRIES-1:0] hit_vec;
  always_comb begin
    lk_hit  = 1'b0;
    lk_xlat = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      hit_vec[i] = ent[i].valid && (ent[i].virt == lk_virt) &&
                   (!lk_virt || ent[i].vmid == lk_vmid) &&
                   (ent[i].xlat.g || ent[i].asid == lk_asid) &&
                   vpn_match(ent[i], lk_vpn);
    end
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (hit_vec[i]) begin
        lk_hit  = 1'b1;
        lk_xlat = ent[i].xlat;
      end
    end
    // rebuild the page numbers of the addressed 4 KiB page
    lk_xlat.ppn  = (lk_xlat.ppn & {{(PPN_W-TAG_W){1'b1}}, size_mask(lk_xlat.size)}) |
                   {{(PPN_W-TAG_W){1'b0}}, lk_vpn & ~size_mask(lk_xlat.size)};
    lk_xlat.gppn = (lk_xlat.gppn & size_mask(lk_xlat.size)) |
                   (lk_vpn & ~size_mask(lk_xlat.size));
  end

  // ---- victim ---------------------------------------------------------------
  logic [IW-1:0] victim;
  logic          have_free;
  always_comb begin
    victim    = rr_q;
    have_free = 1'b0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!ent[i].valid) begin
        victim    = IW'(i);
        have_free = 1'b1;
      end
    end
  end

  // ---- flush selection ------------------------------------------------------
  function automatic logic flush_hit(entry_t e);
    logic k;
    unique case (fl_kind)
      FL_S:    k = !e.virt;
      FL_VV:   k = e.virt && e.vmid == fl_vmid;
      FL_GV:   k = e.virt && (!fl_use_vmid || e.vmid == fl_vmid);
      default: k = 1'b0;
    endcase
    if (fl_use_addr && !vpn_match(e, fl_vpn)) k = 1'b0;
    if (fl_kind != FL_GV && fl_use_asid && (e.xlat.g || e.asid != fl_asid)) k = 1'b0;
    return k;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      rr_q <= '0;
    end else begin
      if (fl_valid) begin
        for (int i = 0; i < ENTRIES; i++)
          if (flush_hit(ent[i])) ent[i].valid <= 1'b0;
      end else if (fill_valid) begin
        ent[victim] <= '{valid: 1'b1, virt: fill_virt, asid: fill_asid,
                         vmid: fill_vmid, vpn: fill_vpn, xlat: fill_xlat};
        if (!have_free)
          rr_q <= (rr_q == IW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
      end
    end
  end

  // a fill and a flush in the same cycle would lose the fill
  a_no_fill_flush: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(fl_valid && fill_valid))
    else $error("tlb: fill and flush in the same cycle");
endmodule
