// ptw_2stage: Sv39 page-table walker with the hypervisor's two-stage walk.
//
// Native walk (V=0): the Sv39 walk of satp's tree. VPN[2], VPN[1], VPN[0]
// (9 bits each) index the root, second and third tables in turn; each 8-byte
// PTE either points to the next table or is a leaf (R or X set) giving a
// 4 KiB, 2 MiB or 1 GiB page. Guest walk (V=1): the guest's own Sv39 tree
// (vsatp, the VS-stage) maps the guest virtual address to a guest-physical
// address (GPA), and the hypervisor's Sv39x4 tree (hgatp, the G-stage) maps
// GPAs to host-physical addresses. Every address the VS-stage walk reads a
// PTE from is itself a GPA, so before each VS-stage PTE read the walker runs
// a full G-stage walk of that PTE's GPA, and after the VS leaf it runs one
// more for the final GPA: up to 3 + 3x3 + 3 = 15 memory reads. Either stage
// may be Bare (vsatp or hgatp MODE 0), in which case it is skipped.
// The G-stage root table is 16 KiB and its index VPN[2] is 11 bits, giving a
// 41-bit GPA. The three-level Sv39 walk and its field widths follow the
// paper's translation figure, the two-stage principle its text; Sv39x4 and
// the fault rules are the hypervisor specification's.
//
// Faults (result fault): a VS-stage or native problem is a page fault; a
// G-stage problem, including a GPA wider than 41 bits, a guest page fault,
// with fault_gpa giving the GPA that could not be translated. Checked during
// the walk: V=0 or W without R, nonzero reserved bits 63:54, no leaf at the
// last level, misaligned superpage, A=0 in a leaf (no hardware A/D update),
// a G-stage leaf without U, and a G-stage leaf of a VS page-table address
// without R. Access permissions of the final page are left to the caller
// (hyp_pkg::perm_check on the returned xlat_t), so the TLB can keep them.
// fault_final marks a guest fault on the final GPA: the VS leaf in xlat is
// then valid, and its page fault has priority over the guest fault.
//
// Handshake: req_valid/req_ready starts a walk (req_ready only in idle);
// memory reads use mem_req_valid/mem_req_ready and a later single-cycle
// mem_resp_valid, one read outstanding. done pulses for one cycle with the
// result in the cycle after the last read's response.
module ptw_2stage
  import hyp_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // walk request
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [63:0]         req_vaddr,
  input  logic                req_virt,
  input  logic [63:0]         satp,
  input  logic [63:0]         vsatp,
  input  logic [63:0]         hgatp,
  // walk result
  output logic                done,
  output flt_e                fault,
  output logic [GPA_W-1:0]    fault_gpa,
  output logic                fault_final,    // guest fault on the final GPA: VS leaf valid
  output xlat_t               xlat,
  // memory read port
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic [PA_W-1:0]     mem_req_addr,
  input  logic                mem_resp_valid,
  input  logic [63:0]         mem_resp_data
);
  typedef enum logic [2:0] {
    S_IDLE, S_S1_ADDR, S_G_START, S_G_REQ, S_G_WAIT, S_S1_REQ, S_S1_WAIT, S_DONE
  } state_e;

  state_e             st_q;
  logic [63:0]        va_q;
  logic               s1_en_q, s2_en_q;
  logic [PPN_W-1:0]   g_root_q;
  logic [1:0]         s1_lvl_q, g_lvl_q;
  logic [PPN_W-1:0]   s1_base_q, g_base_q;
  logic [PA_W-1:0]    s1_pa_q;          // host address of the next VS/native PTE
  logic [GPA_W-1:0]   g_addr_q;         // GPA under G-stage translation
  logic               g_final_q;        // 1: final GPA, 0: a VS-stage PTE address
  pte_t               s1_leaf_q, g_leaf_q;
  logic [1:0]         s1_size_q, g_size_q;
  logic [PPN_W-1:0]   res_ppn_q;
  logic [TAG_W-1:0]   res_gppn_q;
  flt_e               fault_q;
  logic [GPA_W-1:0]   fault_gpa_q;

  pte_t pte;
  assign pte = pte_t'(mem_resp_data);

  // page number of the addressed 4 KiB page inside a leaf of level lvl
  function automatic logic [PPN_W-1:0] leaf_ppn(logic [PPN_W-1:0] ppn, logic [1:0] lvl,
                                                logic [17:0] low);
    unique case (lvl)
      2'd2:    return {ppn[PPN_W-1:18], low};
      2'd1:    return {ppn[PPN_W-1:9],  low[8:0]};
      default: return ppn;
    endcase
  endfunction

  function automatic logic misaligned(logic [PPN_W-1:0] ppn, logic [1:0] lvl);
    unique case (lvl)
      2'd2:    return ppn[17:0] != '0;
      2'd1:    return ppn[8:0]  != '0;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic pte_bad(pte_t p);
    return !p.v || (!p.r && p.w) || p.hi != '0;
  endfunction

  // table-entry addresses
  logic [8:0]       s1_idx;
  logic [10:0]      g_idx;
  logic [PA_W-1:0]  s1_pte_addr, g_pte_addr;
  always_comb begin
    unique case (s1_lvl_q)
      2'd2:    s1_idx = va_q[38:30];
      2'd1:    s1_idx = va_q[29:21];
      default: s1_idx = va_q[20:12];
    endcase
    unique case (g_lvl_q)
      2'd2:    g_idx = g_addr_q[40:30];
      2'd1:    g_idx = {2'b00, g_addr_q[29:21]};
      default: g_idx = {2'b00, g_addr_q[20:12]};
    endcase
    s1_pte_addr = {s1_base_q, 12'd0} + {44'd0, s1_idx, 3'd0};
    g_pte_addr  = {g_base_q, 12'd0}  + {42'd0, g_idx, 3'd0};
  end

  function automatic logic [1:0] min2(logic [1:0] a, logic [1:0] b);
    return (a < b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      va_q        <= '0;
      s1_en_q     <= 1'b0;  s2_en_q   <= 1'b0;
      g_root_q    <= '0;
      s1_lvl_q    <= '0;    g_lvl_q   <= '0;
      s1_base_q   <= '0;    g_base_q  <= '0;
      s1_pa_q     <= '0;    g_addr_q  <= '0;   g_final_q <= 1'b0;
      s1_leaf_q   <= '0;    g_leaf_q  <= '0;
      s1_size_q   <= '0;    g_size_q  <= '0;
      res_ppn_q   <= '0;    res_gppn_q <= '0;
      fault_q     <= FLT_NONE;
      fault_gpa_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (req_valid) begin
          va_q      <= req_vaddr;
          fault_q   <= FLT_NONE;
          fault_gpa_q <= '0;
          s1_size_q <= 2'd2;
          g_size_q  <= 2'd2;
          s1_leaf_q <= '0;
          g_leaf_q  <= '0;
          if (!req_virt) begin
            s1_en_q   <= 1'b1;
            s2_en_q   <= 1'b0;
            s1_base_q <= satp[PPN_W-1:0];
          end else begin
            s1_en_q   <= vsatp[63:60] == ATP_SV39;
            s2_en_q   <= hgatp[63:60] == ATP_SV39;
            s1_base_q <= vsatp[PPN_W-1:0];
          end
          g_root_q  <= hgatp[PPN_W-1:0];
          s1_lvl_q  <= 2'd2;
          res_ppn_q <= req_vaddr[PA_W-1:12];
          res_gppn_q <= req_vaddr[GPA_W-1:12];
          if (!req_virt || vsatp[63:60] == ATP_SV39) begin
            // Sv39 virtual address: bits 63:39 copy bit 38
            if (req_vaddr[63:38] != '0 && req_vaddr[63:38] != '1) begin
              fault_q <= FLT_PAGE;
              st_q    <= S_DONE;
            end else begin
              st_q    <= S_S1_ADDR;
            end
          end else if (hgatp[63:60] == ATP_SV39) begin
            // Bare VS-stage: the address is already a GPA
            g_addr_q  <= req_vaddr[GPA_W-1:0];
            g_final_q <= 1'b1;
            if (req_vaddr[63:GPA_W] != '0) begin
              fault_q     <= FLT_GUEST;
              fault_gpa_q <= req_vaddr[GPA_W-1:0];
              st_q        <= S_DONE;
            end else begin
              st_q        <= S_G_START;
            end
          end else begin
            st_q <= S_DONE;   // both stages Bare
          end
        end

        S_S1_ADDR: begin
          if (s2_en_q) begin
            g_addr_q  <= s1_pte_addr[GPA_W-1:0];
            g_final_q <= 1'b0;
            if (s1_pte_addr[PA_W-1:GPA_W] != '0) begin
              fault_q     <= FLT_GUEST;
              fault_gpa_q <= s1_pte_addr[GPA_W-1:0];
              st_q        <= S_DONE;
            end else begin
              st_q <= S_G_START;
            end
          end else begin
            s1_pa_q <= s1_pte_addr;
            st_q    <= S_S1_REQ;
          end
        end

        S_G_START: begin
          g_lvl_q  <= 2'd2;
          g_base_q <= g_root_q;
          st_q     <= S_G_REQ;
        end

        S_G_REQ: if (mem_req_ready) st_q <= S_G_WAIT;

        S_G_WAIT: if (mem_resp_valid) begin
          if (pte_bad(pte)) begin
            fault_q     <= FLT_GUEST;
            fault_gpa_q <= g_addr_q;
            st_q        <= S_DONE;
          end else if (pte.r || pte.x) begin
            if (misaligned(pte.ppn, g_lvl_q) || !pte.u || !pte.a || (!g_final_q && !pte.r)) begin
              fault_q     <= FLT_GUEST;
              fault_gpa_q <= g_addr_q;
              st_q        <= S_DONE;
            end else if (!g_final_q) begin
              s1_pa_q <= {leaf_ppn(pte.ppn, g_lvl_q, g_addr_q[29:12]), g_addr_q[11:0]};
              st_q    <= S_S1_REQ;
            end else begin
              g_leaf_q  <= pte;
              g_size_q  <= g_lvl_q;
              res_ppn_q <= leaf_ppn(pte.ppn, g_lvl_q, g_addr_q[29:12]);
              st_q      <= S_DONE;
            end
          end else if (g_lvl_q == 2'd0) begin
            fault_q     <= FLT_GUEST;
            fault_gpa_q <= g_addr_q;
            st_q        <= S_DONE;
          end else begin
            g_lvl_q  <= g_lvl_q - 2'd1;
            g_base_q <= pte.ppn;
            st_q     <= S_G_REQ;
          end
        end

        S_S1_REQ: if (mem_req_ready) st_q <= S_S1_WAIT;

        S_S1_WAIT: if (mem_resp_valid) begin
          if (pte_bad(pte)) begin
            fault_q <= FLT_PAGE;
            st_q    <= S_DONE;
          end else if (pte.r || pte.x) begin
            if (misaligned(pte.ppn, s1_lvl_q) || !pte.a) begin
              fault_q <= FLT_PAGE;
              st_q    <= S_DONE;
            end else begin
              s1_leaf_q  <= pte;
              s1_size_q  <= s1_lvl_q;
              res_ppn_q  <= leaf_ppn(pte.ppn, s1_lvl_q, va_q[29:12]);
              res_gppn_q <= leaf_ppn(pte.ppn, s1_lvl_q, va_q[29:12])[TAG_W-1:0];
              if (s2_en_q) begin
                g_addr_q  <= {leaf_ppn(pte.ppn, s1_lvl_q, va_q[29:12])[TAG_W-1:0], va_q[11:0]};
                g_final_q <= 1'b1;
                if (leaf_ppn(pte.ppn, s1_lvl_q, va_q[29:12])[PPN_W-1:TAG_W] != '0) begin
                  fault_q     <= FLT_GUEST;
                  fault_gpa_q <= {leaf_ppn(pte.ppn, s1_lvl_q, va_q[29:12])[TAG_W-1:0], va_q[11:0]};
                  st_q        <= S_DONE;
                end else begin
                  st_q <= S_G_START;
                end
              end else begin
                st_q <= S_DONE;
              end
            end
          end else if (s1_lvl_q == 2'd0) begin
            fault_q <= FLT_PAGE;
            st_q    <= S_DONE;
          end else begin
            s1_lvl_q  <= s1_lvl_q - 2'd1;
            s1_base_q <= pte.ppn;
            st_q      <= S_S1_ADDR;
          end
        end

        S_DONE: st_q <= S_IDLE;

        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready     = (st_q == S_IDLE);
  assign mem_req_valid = (st_q == S_G_REQ) || (st_q == S_S1_REQ);
  assign mem_req_addr  = (st_q == S_G_REQ) ? g_pte_addr : s1_pa_q;
  assign done          = (st_q == S_DONE);
  assign fault         = fault_q;
  assign fault_gpa     = fault_gpa_q;
  assign fault_final   = g_final_q;

  always_comb begin
    xlat       = '0;
    xlat.s1_en = s1_en_q;
    xlat.s2_en = s2_en_q;
    xlat.r  = s1_leaf_q.r;  xlat.w  = s1_leaf_q.w;  xlat.x = s1_leaf_q.x;
    xlat.u  = s1_leaf_q.u;  xlat.g  = s1_leaf_q.g;  xlat.d = s1_leaf_q.d;
    xlat.gr = g_leaf_q.r;   xlat.gw = g_leaf_q.w;   xlat.gx = g_leaf_q.x;
    xlat.gd = g_leaf_q.d;
    xlat.size = min2(s1_en_q ? s1_size_q : 2'd2, s2_en_q ? g_size_q : 2'd2);
    xlat.ppn  = res_ppn_q;
    xlat.gppn = res_gppn_q;
  end

  // the memory answers only a read the walker is waiting for
  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                    mem_resp_valid |-> (st_q == S_G_WAIT || st_q == S_S1_WAIT))
    else $error("ptw_2stage: memory response with no read outstanding");
endmodule
