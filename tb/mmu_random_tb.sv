// mmu_random_tb: randomized end-to-end test of the extension's translation
// path against a reference model.
//
// Page tables with random page sizes and random permission bits are built
// for the host (satp), for the G-stage (hgatp) and for a guest (vsatp, whose
// tables sit in guest-physical memory). The testbench then issues 3000
// random operations through the top-level ports: translations (load, store,
// fetch) of addresses from the mapped pool, near it, and recently used; SFENCE.VMA /
// HFENCE.VVMA / HFENCE.GVMA; and mode changes, made as a core would (a trap
// to M, CSR writes of mstatus.MPP/MPV/SUM/MXR and vsstatus.SUM/MXR, MRET).
// Every translation is compared with a reference: a procedural two-stage
// walk of the same memory plus a permission check written from the rules.
// Because the page tables never change, the answer must not depend on
// whether the TLB hit; TLB hits, walks, both fault kinds and all five modes
// must each occur.
module mmu_random_tb;
  import hyp_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              csr_valid = 1'b0;
  csr_op_e           csr_op = CSR_RW;
  logic [11:0]       csr_addr = '0;
  logic [63:0]       csr_wdata = '0, csr_rdata;
  logic              csr_illegal, csr_virtual;
  logic              trap_valid = 1'b0, trap_is_int = 1'b0, trap_gva = 1'b0;
  logic [5:0]        trap_code = '0;
  logic [63:0]       trap_epc = '0, trap_tval = '0, trap_gpa = '0;
  priv_mode_t        trap_target, mode;
  logic [63:0]       trap_pc;
  logic              mret = 1'b0, sret = 1'b0;
  logic [63:0]       ret_pc;
  logic              sfence_vma = 1'b0, hfence_vvma = 1'b0, hfence_gvma = 1'b0;
  logic              fence_use_addr = 1'b0, fence_use_id = 1'b0;
  logic [63:0]       fence_addr = '0;
  logic [15:0]       fence_id = '0;
  logic              tr_valid = 1'b0, tr_ready;
  logic [63:0]       tr_vaddr = '0;
  acc_e              tr_acc = ACC_LOAD;
  logic              tr_done, tr_exc, tr_gva, tr_tlb_hit;
  logic [PA_W-1:0]   tr_paddr;
  logic [5:0]        tr_cause;
  logic [GPA_W-1:0]  tr_gpa;
  logic              mem_req_valid, mem_req_ready = 1'b0;
  logic [PA_W-1:0]   mem_req_addr;
  logic              mem_resp_valid = 1'b0;
  logic [63:0]       mem_resp_data = '0;
  int checks = 0, failures = 0;
  int n_hit = 0, n_walk = 0, n_ok = 0, n_pf = 0, n_gpf = 0, n_fence = 0;
  int n_mode [5];

  hyp_ext_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory model -----------------------------------------------------------------
  logic [63:0] mem [logic [52:0]];

  function automatic logic [63:0] rd(logic [55:0] pa);
    return mem.exists(pa[55:3]) ? mem[pa[55:3]] : 64'h0;
  endfunction

  initial begin
    forever begin
      @(negedge clk);
      mem_req_ready = 1'($urandom);
      @(posedge clk);
      if (mem_req_valid && mem_req_ready) begin
        logic [55:0] a;
        a = mem_req_addr;
        @(negedge clk);
        mem_req_ready = 1'b0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        mem_resp_valid = 1'b1;
        mem_resp_data  = rd(a);
        @(negedge clk);
        mem_resp_valid = 1'b0;
      end
    end
  end

  // ---- page tables ---------------------------------------------------------------------
  localparam logic [55:0] N_ROOT     = 56'h8000_0000;
  localparam logic [55:0] G_ROOT     = 56'h9000_0000;
  localparam logic [55:0] VS_WIN_GPA = 56'h100_0000_0000;
  localparam logic [55:0] VS_WIN_HPA = 56'h2_0000_0000;
  localparam logic [55:0] VS_ROOT    = VS_WIN_GPA + 56'h10_0000;
  localparam logic [63:0] SATP  = {4'd8, 16'd1, N_ROOT[55:12]};
  localparam logic [63:0] VSATP = {4'd8, 16'd2, VS_ROOT[55:12]};
  localparam logic [63:0] HGATP = {4'd8, 2'd0, 14'd3, G_ROOT[55:12]};
  logic [55:0] n_next = N_ROOT + 56'h1000, g_next = G_ROOT + 56'h4000, vs_next = VS_ROOT + 56'h1000;

  function automatic logic [55:0] tab2pa(logic [55:0] a, int space);
    return (space == 2) ? a - VS_WIN_GPA + VS_WIN_HPA : a;
  endfunction

  function automatic logic [10:0] idx(logic [63:0] va, int l, int space);
    case (l)
      2: return (space == 1) ? va[40:30] : {2'b00, va[38:30]};
      1: return {2'b00, va[29:21]};
      default: return {2'b00, va[20:12]};
    endcase
  endfunction

  // returns 0 when the slot is already taken by a pointer or leaf of another size
  function automatic bit map(int space, logic [63:0] va, logic [43:0] ppn, int lvl, logic [7:0] flags);
    logic [55:0] a, pa;
    a = (space == 0) ? N_ROOT : (space == 1) ? G_ROOT : VS_ROOT;
    for (int l = 2; l > lvl; l--) begin
      pa = tab2pa(a + {42'd0, idx(va, l, space), 3'd0}, space);
      if (rd(pa)[0] && (rd(pa)[1] || rd(pa)[3])) return 0;    // a leaf already there
      if (!rd(pa)[0]) begin
        logic [55:0] t;
        if (space == 0) begin t = n_next; n_next += 56'h1000; end
        else if (space == 1) begin t = g_next; g_next += 56'h1000; end
        else begin t = vs_next; vs_next += 56'h1000; end
        mem[pa[55:3]] = {10'd0, t[55:12], 2'b00, 8'h01};
      end
      a = {rd(pa)[53:10], 12'd0};
    end
    pa = tab2pa(a + {42'd0, idx(va, lvl, space), 3'd0}, space);
    if (rd(pa)[0]) return 0;
    mem[pa[55:3]] = {10'd0, ppn, 2'b00, flags};
    return 1;
  endfunction

  // random leaf flags: valid, mostly sane R/W/X, sometimes A or D clear
  function automatic logic [7:0] rnd_flags(bit guest_g);
    logic [7:0] f;
    logic [2:0] rwx;
    rwx = 3'($urandom_range(1, 7));
    if (rwx == 3'b010 || rwx == 3'b110) rwx[0] = 1'b1;  // W needs R: x,w,r order is bit2..0
    f = {($urandom_range(0, 4) != 0), ($urandom_range(0, 6) != 0), 1'b0,
         guest_g ? ($urandom_range(0, 6) != 0) : 1'($urandom), rwx, 1'b1};
    return f;   // D A G U X W R V
  endfunction

  logic [63:0] pool [$];
  logic [63:0] recent [$];    // recently used addresses, for TLB hits

  task automatic build();
    logic [63:0] va, gpa;
    int lvl;
    void'(map(1, VS_WIN_GPA, VS_WIN_HPA[55:12], 2, 8'hD3));          // guest tables: R, U, A, D
    // G-stage pages over GPA 0 .. 16 GiB
    for (int i = 0; i < 40; i++) begin
      lvl = $urandom_range(0, 2);
      gpa = (64'($urandom_range(0, 15)) << 30) | (64'($urandom_range(0, 511)) << 21) |
            (64'($urandom_range(0, 511)) << 12);
      gpa &= ~((64'h1 << (12 + 9 * lvl)) - 1);
      void'(map(1, gpa, 44'h10_0000 + 44'(i << 18), lvl, rnd_flags(1)));
    end
    // VS-stage and native pages; guest pages point into the same 16 GiB GPA range
    for (int i = 0; i < 60; i++) begin
      lvl = $urandom_range(0, 2);
      va  = (64'($urandom_range(0, 15)) << 30) | (64'($urandom_range(0, 511)) << 21) |
            (64'($urandom_range(0, 511)) << 12);
      va &= ~((64'h1 << (12 + 9 * lvl)) - 1);
      gpa = (64'($urandom_range(0, 15)) << 30) | (64'($urandom_range(0, 511)) << 21) |
            (64'($urandom_range(0, 511)) << 12);
      gpa &= ~((64'h1 << (12 + 9 * lvl)) - 1);
      if (i % 2 == 0) void'(map(2, va, gpa[55:12], lvl, rnd_flags(0)));
      else            void'(map(0, va, 44'h8_0000 + 44'(i << 18), lvl, rnd_flags(0)));
      pool.push_back(va);
    end
  endtask

  // ---- reference ----------------------------------------------------------------------
  bit ref_virt_s1, ref_virt_s2;

  function automatic bit g_walk(logic [63:0] gpa, bit implicit_rd, output logic [43:0] hppn,
                                output int lvl_o, output pte_t leaf);
    logic [55:0] a;
    pte_t p;
    hppn = '0; lvl_o = 0; leaf = '0;
    if (gpa[63:41] != 0) return 0;
    a = {HGATP[43:0], 12'd0};
    for (int l = 2; l >= 0; l--) begin
      p = pte_t'(rd(a + {42'd0, idx(gpa, l, 1), 3'd0}));
      if (!p.v || (p.w && !p.r) || p.hi != 0) return 0;
      if (p.r || p.x) begin
        if ((l == 2 && p.ppn[17:0] != 0) || (l == 1 && p.ppn[8:0] != 0)) return 0;
        if (!p.u || !p.a || (implicit_rd && !p.r)) return 0;
        hppn = p.ppn;
        if (l >= 1) hppn[8:0]  = gpa[20:12];
        if (l == 2) hppn[17:9] = gpa[29:21];
        lvl_o = l; leaf = p;
        return 1;
      end
      a = {p.ppn, 12'd0};
    end
    return 0;
  endfunction

  // expected outcome of one translation: 0 ok, 1 page fault, 2 guest page fault
  function automatic int ref_xlate(logic [63:0] va, acc_e acc, priv_mode_t m, bit sum_h, bit mxr_h,
                                   bit sum_v, bit mxr_v, output logic [55:0] pa,
                                   output logic [40:0] gpa_o);
    logic [55:0] a, ptea;
    logic [63:0] gpa;
    logic [43:0] hppn;
    int gl;
    pte_t p, leaf, gleaf;
    bit virt, user, sum, mxr, ok;
    pa = '0; gpa_o = '0;
    if (m.prv == PRV_M) begin pa = va[55:0]; return 0; end
    virt = m.v; user = (m.prv == PRV_U);
    sum  = virt ? sum_v : sum_h;
    mxr  = virt ? (mxr_v | mxr_h) : mxr_h;
    if (va[63:38] != '0 && va[63:38] != '1) return 1;
    a = {(virt ? VSATP[43:0] : SATP[43:0]), 12'd0};
    leaf = '0;
    for (int l = 2; l >= 0; l--) begin
      ptea = a + {42'd0, idx(va, l, 0), 3'd0};
      if (virt) begin
        if (!g_walk({8'd0, ptea}, 1, hppn, gl, gleaf)) begin gpa_o = ptea[40:0]; return 2; end
        ptea = {hppn, ptea[11:0]};
      end
      p = pte_t'(rd(ptea));
      if (!p.v || (p.w && !p.r) || p.hi != 0) return 1;
      if (p.r || p.x) begin
        if ((l == 2 && p.ppn[17:0] != 0) || (l == 1 && p.ppn[8:0] != 0) || !p.a) return 1;
        gpa = {8'd0, p.ppn, va[11:0]};
        if (l >= 1) gpa[20:12] = va[20:12];
        if (l == 2) gpa[29:21] = va[29:21];
        leaf = p;
        break;
      end
      if (l == 0) return 1;
      a = {p.ppn, 12'd0};
    end
    // first-stage permissions
    if (user && !leaf.u) return 1;
    if (!user && leaf.u && (acc == ACC_FETCH || !sum)) return 1;
    case (acc)
      ACC_FETCH: ok = leaf.x;
      ACC_STORE: ok = leaf.w && leaf.d;
      default:   ok = leaf.r || (mxr && leaf.x);
    endcase
    if (!ok) return 1;
    if (!virt) begin pa = gpa[55:0]; return 0; end
    // G-stage of the final GPA, then its permissions
    gpa_o = gpa[40:0];
    if (gpa[63:41] != 0) return 2;
    if (!g_walk(gpa, 0, hppn, gl, gleaf)) return 2;
    case (acc)
      ACC_FETCH: ok = gleaf.x;
      ACC_STORE: ok = gleaf.w && gleaf.d;
      default:   ok = gleaf.r || (mxr_h && gleaf.x);
    endcase
    if (!ok) return 2;
    gpa_o = '0;
    pa = {hppn, va[11:0]};
    return 0;
  endfunction

  // ---- core-side helpers ------------------------------------------------------------------
  task automatic wr(logic [11:0] a, logic [63:0] wd);
    @(negedge clk);
    csr_valid = 1'b1; csr_op = CSR_RW; csr_addr = a; csr_wdata = wd;
    #1;
    checks++;
    if (csr_illegal || csr_virtual) begin failures++; $display("FAIL write %h refused", a); end
    @(negedge clk);
    csr_valid = 1'b0;
  endtask

  bit sum_h = 0, mxr_h = 0, sum_v = 0, mxr_v = 0;
  priv_mode_t cur_mode = MODE_M;

  task automatic change_mode();
    priv_mode_t nm;
    case ($urandom_range(0, 4))
      0: nm = MODE_M; 1: nm = MODE_HS; 2: nm = MODE_U; 3: nm = MODE_VS; default: nm = MODE_VU;
    endcase
    sum_h = 1'($urandom); mxr_h = 1'($urandom); sum_v = 1'($urandom); mxr_v = 1'($urandom);
    // trap to M (nothing is delegated), then set up and return
    @(negedge clk);
    trap_valid = 1'b1; trap_is_int = 1'b0; trap_code = EXC_ILLEGAL_INST;
    @(negedge clk);
    trap_valid = 1'b0;
    checks++;
    if (mode != MODE_M) begin failures++; $display("FAIL trap did not reach M"); end
    wr(CSR_MSTATUS, (64'(nm.v) << ST_MPV) | (64'(nm.prv) << ST_MPP) |
                    (64'(sum_h) << ST_SUM) | (64'(mxr_h) << ST_MXR));
    wr(CSR_VSSTATUS, (64'(sum_v) << ST_SUM) | (64'(mxr_v) << ST_MXR));
    @(negedge clk); mret = 1'b1; @(negedge clk); mret = 1'b0;
    cur_mode = nm;
    checks++;
    if (mode != nm) begin failures++; $display("FAIL MRET reached %p, expected %p", mode, nm); end
  endtask

  task automatic do_fence();
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    case ($urandom_range(0, 2))
      0: sfence_vma = 1'b1; 1: hfence_vvma = 1'b1; default: hfence_gvma = 1'b1;
    endcase
    @(negedge clk);
    sfence_vma = 1'b0; hfence_vvma = 1'b0; hfence_gvma = 1'b0;
    n_fence++;
  endtask

  task automatic do_xlate();
    logic [63:0] va;
    acc_e acc;
    int exp;
    logic [55:0] epa;
    logic [40:0] egpa;
    va = pool[$urandom_range(0, pool.size() - 1)];
    if (recent.size() > 0 && $urandom_range(0, 9) < 4)
      va = recent[$urandom_range(0, recent.size() - 1)] ^ 64'($urandom_range(0, 4095));
    else case ($urandom_range(0, 3))
      0: va += 64'($urandom_range(0, 4095));
      1: va += 64'($urandom_range(0, 2 ** 21 - 1));
      2: va += 64'($urandom) % (64'h1 << 30);
      default: va += 64'($urandom_range(0, 4095)) + (64'($urandom_range(0, 3)) << 12);
    endcase
    case ($urandom_range(0, 2)) 0: acc = ACC_LOAD; 1: acc = ACC_STORE; default: acc = ACC_FETCH; endcase
    recent.push_back(va);
    if (recent.size() > 12) void'(recent.pop_front());
    exp = ref_xlate(va, acc, cur_mode, sum_h, mxr_h, sum_v, mxr_v, epa, egpa);
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    tr_valid = 1'b1; tr_vaddr = va; tr_acc = acc;
    @(posedge clk); #1;
    tr_valid = 1'b0;
    while (!tr_done) begin @(posedge clk); #1; end
    checks++;
    if ((exp == 0 && (tr_exc || tr_paddr != epa)) ||
        (exp == 1 && (!tr_exc || tr_cause != fault_cause(FLT_PAGE, acc))) ||
        (exp == 2 && (!tr_exc || tr_cause != fault_cause(FLT_GUEST, acc) || tr_gpa != egpa))) begin
      failures++;
      $display("FAIL mode %p va %h acc %0d: exc=%0d cause=%0d pa=%h gpa=%h hit=%0d; expected %0d pa=%h gpa=%h",
               cur_mode, va, acc, tr_exc, tr_cause, tr_paddr, tr_gpa, tr_tlb_hit, exp, epa, egpa);
    end
    if (tr_tlb_hit) n_hit++; else n_walk++;
    if (exp == 0) n_ok++; else if (exp == 1) n_pf++; else n_gpf++;
    if (cur_mode == MODE_M) n_mode[0]++; else if (cur_mode == MODE_HS) n_mode[1]++;
    else if (cur_mode == MODE_U) n_mode[2]++; else if (cur_mode == MODE_VS) n_mode[3]++;
    else n_mode[4]++;
  endtask

  initial begin
    build();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(CSR_SATP, SATP);
    wr(CSR_VSATP, VSATP);
    wr(CSR_HGATP, HGATP);
    for (int n = 0; n < 3000; n++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 4) change_mode();
      else if (r < 7) do_fence();
      else do_xlate();
    end
    $display("hits=%0d walks=%0d ok=%0d pf=%0d gpf=%0d fences=%0d  M=%0d HS=%0d U=%0d VS=%0d VU=%0d",
             n_hit, n_walk, n_ok, n_pf, n_gpf, n_fence, n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4]);
    checks++;
    if (n_hit == 0 || n_walk == 0 || n_ok == 0 || n_pf == 0 || n_gpf == 0 || n_fence == 0 ||
        n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_mode[3] == 0 || n_mode[4] == 0) begin
      failures++;
      $display("FAIL: an outcome or mode never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
