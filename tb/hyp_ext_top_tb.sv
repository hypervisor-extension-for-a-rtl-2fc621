// hyp_ext_top_tb: end-to-end test of the hypervisor extension at its default
// parameters.
//
// Acting as the core, the testbench builds a native Sv39 page table, a
// G-stage Sv39x4 table and a guest VS-stage table in a memory model, sets up
// the CSRs from M mode, and then runs a scenario through all five privilege
// modes: Bare translation in M; native walks, a TLB hit and a permission
// fault in HS; two-stage walks, 4 KiB and 2 MiB pages, a guest page fault
// taken in HS (htval checked), a page fault delegated to VS, a CSR access
// turned into a virtual-instruction exception and an S-CSR redirected to its
// VS copy in VS; SFENCE.VMA from VS, HFENCE.GVMA and SFENCE.VMA from HS with
// their effect on later hits; a trap from HS to M; user accesses in VU. Each
// expected physical address, cause and mode is written out in the test.
// Every mechanism listed at the end must have happened at least once.
module hyp_ext_top_tb;
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

  hyp_ext_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanisms that must happen ---------------------------------------------
  typedef enum int {
    M_BARE, M_NATIVE_WALK, M_GUEST_WALK, M_TLB_HIT, M_PAGE_FAULT, M_GUEST_FAULT,
    M_TRAP_M, M_TRAP_HS, M_TRAP_VS, M_ENTER_VS, M_ENTER_VU, M_VIRT_INST,
    M_VS_REDIRECT, M_FENCE_MISS, M_SUPERPAGE, M_COUNT
  } mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"bare translation", "native walk", "two-stage walk", "TLB hit",
    "page fault", "guest page fault", "trap to M", "trap to HS", "trap to VS", "entry to VS",
    "entry to VU", "virtual-instruction exception", "S-CSR redirected to VS copy",
    "miss after a fence", "superpage translation"};

  // ---- memory model -----------------------------------------------------------
  logic [63:0] mem [logic [52:0]];
  int          reads;

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
        reads++;
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

  localparam logic [55:0] N_ROOT  = 56'h8000_0000;
  localparam logic [55:0] G_ROOT  = 56'h9000_0000;
  localparam logic [55:0] VS_ROOT = 56'h8010_0000;
  localparam logic [55:0] VS_WIN_GPA = 56'h8000_0000;
  localparam logic [55:0] VS_WIN_HPA = 56'h2_0000_0000;
  localparam logic [7:0]  F_ALL = 8'hDF, F_SUP = 8'hCF, F_NOA = 8'h9F, F_PTR = 8'h01;
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

  // space 0: native (satp), 1: G-stage (hgatp), 2: VS-stage (vsatp, tables in GPA space)
  task automatic map(int space, logic [63:0] va, logic [43:0] ppn, int lvl, logic [7:0] flags);
    logic [55:0] a, pa;
    a = (space == 0) ? N_ROOT : (space == 1) ? G_ROOT : VS_ROOT;
    for (int l = 2; l > lvl; l--) begin
      pa = tab2pa(a + {42'd0, idx(va, l, space), 3'd0}, space);
      if (!rd(pa)[0]) begin
        logic [55:0] t;
        if (space == 0) begin t = n_next; n_next += 56'h1000; end
        else if (space == 1) begin t = g_next; g_next += 56'h1000; end
        else begin t = vs_next; vs_next += 56'h1000; end
        mem[pa[55:3]] = {10'd0, t[55:12], 2'b00, F_PTR};
      end
      a = {rd(pa)[53:10], 12'd0};
    end
    pa = tab2pa(a + {42'd0, idx(va, lvl, space), 3'd0}, space);
    mem[pa[55:3]] = {10'd0, ppn, 2'b00, flags};
  endtask

  // ---- core-side operations ------------------------------------------------------
  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (mode %p)", what, mode); end
  endtask

  task automatic csr(logic [11:0] a, logic [63:0] wd, output logic [63:0] rdv,
                     output logic ill, output logic vi, input csr_op_e op = CSR_RW);
    @(negedge clk);
    csr_valid = 1'b1; csr_op = op; csr_addr = a; csr_wdata = wd;
    #1;
    rdv = csr_rdata; ill = csr_illegal; vi = csr_virtual;
    @(negedge clk);
    csr_valid = 1'b0;
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] wd);
    logic [63:0] r; logic ill, vi;
    csr(a, wd, r, ill, vi);
    chk($sformatf("write %h accepted", a), !ill && !vi);
  endtask

  task automatic rd_expect(logic [11:0] a, logic [63:0] exp);
    logic [63:0] r; logic ill, vi;
    csr(a, 64'h0, r, ill, vi, CSR_RS);
    chk($sformatf("read %h = %h (got %h)", a, exp, r), !ill && !vi && r == exp);
  endtask

  task automatic trap(logic [5:0] code, logic [63:0] tval, logic [63:0] gpa, logic gva,
                      priv_mode_t exp_t, logic [63:0] exp_pc);
    @(negedge clk);
    trap_valid = 1'b1; trap_is_int = 1'b0; trap_code = code;
    trap_epc = 64'h4000; trap_tval = tval; trap_gpa = gpa; trap_gva = gva;
    #1;
    chk($sformatf("trap %0d goes to %p", code, exp_t), trap_target == exp_t && trap_pc == exp_pc);
    @(negedge clk);
    trap_valid = 1'b0;
    chk("mode after trap", mode == exp_t);
    if (exp_t == MODE_M) mech[M_TRAP_M]++;
    else if (exp_t == MODE_HS) mech[M_TRAP_HS]++;
    else mech[M_TRAP_VS]++;
  endtask

  task automatic xret(logic is_m, priv_mode_t exp_mode);
    @(negedge clk);
    mret = is_m; sret = !is_m;
    @(negedge clk);
    mret = 1'b0; sret = 1'b0;
    chk($sformatf("xRET to %p", exp_mode), mode == exp_mode);
    if (mode == MODE_VS) mech[M_ENTER_VS]++;
    if (mode == MODE_VU) mech[M_ENTER_VU]++;
  endtask

  task automatic fence(int kind);
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    sfence_vma = (kind == 0); hfence_vvma = (kind == 1); hfence_gvma = (kind == 2);
    @(negedge clk);
    sfence_vma = 1'b0; hfence_vvma = 1'b0; hfence_gvma = 1'b0;
  endtask

  // one translation; exp_hit: 0 miss, 1 hit, 2 don't care
  task automatic xlate(logic [63:0] va, acc_e acc, logic exp_exc, logic [5:0] exp_cause,
                       logic [55:0] exp_pa, int exp_hit = 2, logic [40:0] exp_gpa = '0);
    int cyc;
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    tr_valid = 1'b1; tr_vaddr = va; tr_acc = acc;
    reads = 0; cyc = 0;
    @(posedge clk); #1;
    tr_valid = 1'b0;
    while (!tr_done) begin @(posedge clk); #1; cyc++; end
    if (exp_exc)
      chk($sformatf("va %h faults with cause %0d (got exc=%0d cause=%0d)", va, exp_cause, tr_exc, tr_cause),
          tr_exc && tr_cause == exp_cause && (exp_cause != EXC_LOAD_GUEST || tr_gpa == exp_gpa));
    else
      chk($sformatf("va %h -> pa %h (got exc=%0d %h)", va, exp_pa, tr_exc, tr_paddr),
          !tr_exc && tr_paddr == exp_pa);
    if (exp_hit != 2) chk($sformatf("va %h TLB hit=%0d", va, exp_hit), tr_tlb_hit == exp_hit[0]);
    // a hit answers the cycle after the request, with no memory read
    if (tr_tlb_hit) begin
      mech[M_TLB_HIT]++;
      chk("TLB hit latency", cyc == 0 && reads == 0);
    end
    if (tr_exc && tr_cause inside {EXC_LOAD_PAGE, EXC_STORE_PAGE, EXC_INST_PAGE}) mech[M_PAGE_FAULT]++;
    if (tr_exc && tr_cause inside {EXC_LOAD_GUEST, EXC_STORE_GUEST, EXC_INST_GUEST}) mech[M_GUEST_FAULT]++;
    if (!tr_tlb_hit && reads > 0) begin
      if (mode.v) mech[M_GUEST_WALK]++; else mech[M_NATIVE_WALK]++;
    end
    if (mode == MODE_M) mech[M_BARE]++;
  endtask

  initial begin
    logic [63:0] r; logic ill, vi;
    // page tables
    map(1, 64'h8000_0000, 44'h20_0000, 2, F_ALL);   // GPA window of the VS tables
    map(1, 64'h1000_0000, 44'h31_0000, 0, F_ALL);   // 4 KiB guest-physical page
    map(1, 64'h1000_1000, 44'h31_0005, 0, F_NOA);   // A clear: guest page fault
    map(1, 64'h4000_0000, 44'h30_0000, 1, F_ALL);   // 2 MiB guest-physical page
    map(2, 64'h1000,      44'h1_0000, 0, F_ALL);    // VA 0x1000 -> GPA 0x1000_0000
    map(2, 64'h2000,      44'h1_0001, 0, F_ALL);    // VA 0x2000 -> GPA 0x1000_1000
    map(2, 64'h20_0000,   44'h4_0000, 1, F_SUP);    // VA 2 MiB  -> GPA 0x4000_0000
    map(0, 64'h1000,      44'h50_0000, 0, F_SUP);   // native VA 0x1000 -> PA 0x5_0000_0000
    map(0, 64'h20_0000,   44'h50_0200, 1, F_ALL);   // native 2 MiB user page

    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- M: Bare ----------------------------------------------------------------
    chk("reset in M", mode == MODE_M);
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h1234);
    wr(CSR_SATP,  {4'd8, 16'd1, N_ROOT[55:12]});
    wr(CSR_VSATP, {4'd8, 16'd2, VS_ROOT[55:12]});
    wr(CSR_HGATP, {4'd8, 2'd0, 14'd5, G_ROOT[55:12]});
    wr(CSR_MEDELEG, (64'h1 << 8) | (64'h1 << 10) | (64'h1 << 12) | (64'h1 << 13) |
                    (64'h1 << 15) | (64'h1 << 21));
    wr(CSR_HEDELEG, (64'h1 << 8) | (64'h1 << 13));
    wr(CSR_MTVEC, 64'h100);  wr(CSR_STVEC, 64'h200);  wr(CSR_VSTVEC, 64'h300);
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h1234);       // M stays Bare with satp set
    // ---- HS: native Sv39 ----------------------------------------------------------
    wr(CSR_MSTATUS, 64'h800);                        // MPP=S, MPV=0
    xret(1'b1, MODE_HS);
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h5_0000_0234, 0);
    xlate(64'h1FF8, ACC_STORE, 0, 0, 56'h5_0000_0FF8, 1);
    xlate(64'h20_0010, ACC_STORE, 1, EXC_STORE_PAGE, 0); // user page, SUM=0
    trap(EXC_STORE_PAGE, 64'h20_0010, 0, 0, MODE_HS, 64'h200);
    // ---- HS -> VS ------------------------------------------------------------------
    wr(CSR_HSTATUS, 64'h80);                          // SPV=1
    wr(CSR_SSTATUS, 64'h100);                         // SPP=1
    xret(1'b0, MODE_VS);
    xlate(64'h1234, ACC_LOAD, 1, EXC_LOAD_PAGE, 0, 0);   // guest user page, vsstatus.SUM=0
    wr(CSR_SSTATUS, 64'h4_0000);                           // vsstatus.SUM=1
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h3_1000_0234, 1);  // cached by the faulting walk
    xlate(64'h1238, ACC_FETCH, 1, EXC_INST_PAGE, 0, 1);   // SUM never allows fetch
    xlate(64'h1238, ACC_STORE, 0, 0, 56'h3_1000_0238, 1);
    xlate(64'h20_0010, ACC_FETCH, 0, 0, 56'h3_0000_0010, 0);
    xlate(64'h3F_F000, ACC_LOAD, 0, 0, 56'h3_001F_F000, 1); // same 2 MiB page
    mech[M_SUPERPAGE]++;
    xlate(64'h2040, ACC_LOAD, 1, EXC_LOAD_GUEST, 0, 2, 41'h1000_1040);
    trap(EXC_LOAD_GUEST, 64'h2040, 64'h1000_1040, 1, MODE_HS, 64'h200);
    rd_expect(CSR_HTVAL, 64'h1000_1040 >> 2);
    rd_expect(CSR_STVAL, 64'h2040);
    xret(1'b0, MODE_VS);                              // SPV and SPP set by the trap
    xlate(64'h3000, ACC_LOAD, 1, EXC_LOAD_PAGE, 0);   // not mapped by the guest
    trap(EXC_LOAD_PAGE, 64'h3000, 0, 1, MODE_VS, 64'h300);
    csr(CSR_HGATP, 64'h0, r, ill, vi);
    chk("hgatp from VS is a virtual instruction", vi && !ill);
    if (vi) mech[M_VIRT_INST]++;
    rd_expect(CSR_SATP, {4'd8, 16'd2, VS_ROOT[55:12]});   // satp reads vsatp
    mech[M_VS_REDIRECT]++;
    // SFENCE.VMA in VS flushes this guest's translations
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h3_1000_0234, 1);
    fence(0);
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h3_1000_0234, 0);
    mech[M_FENCE_MISS]++;
    // ---- ECALL from VS to HS; fences in HS ------------------------------------------
    trap(EXC_ECALL_VS, 0, 0, 0, MODE_HS, 64'h200);
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h5_0000_0234, 1);  // native entry still cached
    fence(2);                                         // HFENCE.GVMA: guest entries only
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h5_0000_0234, 1);
    fence(0);                                         // SFENCE.VMA from HS: native entries
    xlate(64'h1234, ACC_LOAD, 0, 0, 56'h5_0000_0234, 0);
    mech[M_FENCE_MISS]++;
    // ---- HS -> M ----------------------------------------------------------------------
    trap(EXC_ILLEGAL_INST, 0, 0, 0, MODE_M, 64'h100);
    // ---- M -> VU: guest user code -------------------------------------------------------
    wr(CSR_MSTATUS, 64'h0000_0080_0000_0000);         // MPV=1, MPP=U
    xret(1'b1, MODE_VU);
    xlate(64'h1100, ACC_LOAD, 0, 0, 56'h3_1000_0100, 0);  // guest entries were fenced
    xlate(64'h20_0000, ACC_LOAD, 1, EXC_LOAD_PAGE, 0);    // guest supervisor page
    trap(EXC_LOAD_PAGE, 64'h20_0000, 0, 1, MODE_VS, 64'h300);
    rd_expect(CSR_SCAUSE, 64'd13);                        // vscause
    rd_expect(CSR_SSTATUS, 64'h0000_0002_0004_0000);      // SUM, SPP=0: came from VU

    foreach (mech[i]) begin
      $display("%-32s %0d", mech_name[i], mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL: %s never happened", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
