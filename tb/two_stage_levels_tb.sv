// two_stage_levels_tb: every combination of page sizes in the two-stage
// translation, run through the complete extension.
//
// For each of the nine pairs (VS-stage leaf level, G-stage leaf level), with
// levels giving 4 KiB, 2 MiB and 1 GiB pages, the testbench maps a guest
// virtual page onto a guest-physical page and that onto a host page, and
// then, in VS mode:
//   - translates an address inside both pages (a walk) and checks the host
//     address;
//   - translates a second address inside the smaller page and checks that
//     the TLB answers it (the entry covers the smaller of the two sizes);
//   - when the sizes differ, translates an address past the smaller page but
//     inside the larger one: if the G-stage page is the smaller, the
//     guest-physical address is unmapped (guest page fault, with the GPA
//     checked); if the VS page is the smaller, the guest address is unmapped
//     (page fault).
// The three native Sv39 page sizes are checked the same way in HS mode.
// Expected addresses are base-plus-offset arithmetic on the chosen layout.
module two_stage_levels_tb;
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
  int n_walk = 0, n_hit = 0, n_pf = 0, n_gpf = 0;

  hyp_ext_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory model (random ready, 1-3 cycle latency) ---------------------------
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

  // ---- layout ---------------------------------------------------------------------
  localparam logic [55:0] N_ROOT     = 56'h8000_0000;
  localparam logic [55:0] G_ROOT     = 56'h9000_0000;
  localparam logic [55:0] VS_WIN_GPA = 56'h100_0000_0000;   // GPA window of the VS tables
  localparam logic [55:0] VS_WIN_HPA = 56'h2_0000_0000;
  localparam logic [55:0] VS_ROOT    = VS_WIN_GPA + 56'h10_0000;
  localparam logic [7:0]  F_ALL = 8'hDF, F_SUP = 8'hCF, F_PTR = 8'h01;
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

  function automatic logic [63:0] page_bytes(int lvl);
    return 64'h1000 << (9 * lvl);
  endfunction

  // ---- core-side helpers ----------------------------------------------------------
  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] wd);
    @(negedge clk);
    csr_valid = 1'b1; csr_op = CSR_RW; csr_addr = a; csr_wdata = wd;
    #1;
    chk($sformatf("write %h", a), !csr_illegal && !csr_virtual);
    @(negedge clk);
    csr_valid = 1'b0;
  endtask

  task automatic xlate(logic [63:0] va, output logic exc, output logic [5:0] cause,
                       output logic [55:0] pa, output logic hit, output logic [40:0] gpa);
    @(negedge clk);
    while (!tr_ready) @(negedge clk);
    tr_valid = 1'b1; tr_vaddr = va; tr_acc = ACC_LOAD;
    @(posedge clk); #1;
    tr_valid = 1'b0;
    while (!tr_done) begin @(posedge clk); #1; end
    exc = tr_exc; cause = tr_cause; pa = tr_paddr; hit = tr_tlb_hit; gpa = tr_gpa;
    if (hit) n_hit++; else n_walk++;
    if (exc && cause == EXC_LOAD_PAGE) n_pf++;
    if (exc && cause == EXC_LOAD_GUEST) n_gpf++;
  endtask

  // one pair of page sizes; l2 < 0 means a native (single-stage) mapping
  task automatic run_pair(int k, int l1, int l2);
    logic [63:0] va_base, gpa_base, hpa_base, sz_small, sz_big, o;
    logic exc, hit; logic [5:0] cause; logic [55:0] pa; logic [40:0] gpa;
    string tag;
    tag      = (l2 < 0) ? $sformatf("native %0d", l1) : $sformatf("VS %0d / G %0d", l1, l2);
    va_base  = 64'h4000_0000 * 64'(k + 1);
    gpa_base = 64'h4000_0000 * 64'(k + 1);
    hpa_base = 64'h10_0000_0000 + 64'h4000_0000 * 64'(k);
    if (l2 < 0) begin
      map(0, va_base, hpa_base[55:12], l1, F_SUP);
      sz_small = page_bytes(l1); sz_big = sz_small;
    end else begin
      map(2, va_base, gpa_base[55:12], l1, F_SUP);
      map(1, gpa_base, hpa_base[55:12], l2, F_ALL);
      sz_small = page_bytes(l1 < l2 ? l1 : l2);
      sz_big   = page_bytes(l1 > l2 ? l1 : l2);
    end
    // a walk
    o = 64'($urandom) % sz_small;
    xlate(va_base + o, exc, cause, pa, hit, gpa);
    chk($sformatf("%s: walk to %h (got exc=%0d pa=%h)", tag, hpa_base + o, exc, pa),
        !exc && !hit && pa == 56'(hpa_base + o));
    // a hit anywhere in the smaller page
    o = 64'($urandom) % sz_small;
    xlate(va_base + o, exc, cause, pa, hit, gpa);
    chk($sformatf("%s: TLB hit to %h (got exc=%0d hit=%0d pa=%h)", tag, hpa_base + o, exc, hit, pa),
        !exc && hit && pa == 56'(hpa_base + o));
    // past the smaller page, inside the larger one
    if (sz_big != sz_small) begin
      o = sz_small + 64'($urandom) % (sz_big - sz_small);
      xlate(va_base + o, exc, cause, pa, hit, gpa);
      if (l2 < l1)
        chk($sformatf("%s: guest page fault at GPA %h (got exc=%0d cause=%0d gpa=%h)",
                      tag, gpa_base + o, exc, cause, gpa),
            exc && cause == EXC_LOAD_GUEST && gpa == 41'(gpa_base + o) && !hit);
      else
        chk($sformatf("%s: page fault (got exc=%0d cause=%0d)", tag, exc, cause),
            exc && cause == EXC_LOAD_PAGE && !hit);
    end
  endtask

  initial begin
    map(1, VS_WIN_GPA, VS_WIN_HPA[55:12], 2, F_ALL);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wr(CSR_SATP,  {4'd8, 16'd1, N_ROOT[55:12]});
    wr(CSR_VSATP, {4'd8, 16'd2, VS_ROOT[55:12]});
    wr(CSR_HGATP, {4'd8, 2'd0, 14'd3, G_ROOT[55:12]});
    // native sizes in HS
    wr(CSR_MSTATUS, 64'h800);                         // MPP=S
    @(negedge clk); mret = 1'b1; @(negedge clk); mret = 1'b0;
    chk("in HS", mode == MODE_HS);
    for (int l = 0; l < 3; l++) run_pair(20 + l, l, -1);
    // back to M, then into VS
    @(negedge clk); trap_valid = 1'b1; trap_code = EXC_ECALL_HS; @(negedge clk); trap_valid = 1'b0;
    chk("in M", mode == MODE_M);
    wr(CSR_MSTATUS, 64'h0000_0080_0000_0800);         // MPV=1, MPP=S
    @(negedge clk); mret = 1'b1; @(negedge clk); mret = 1'b0;
    chk("in VS", mode == MODE_VS);
    for (int l1 = 0; l1 < 3; l1++)
      for (int l2 = 0; l2 < 3; l2++)
        run_pair(l1 * 3 + l2, l1, l2);
    $display("walks=%0d hits=%0d page-faults=%0d guest-page-faults=%0d", n_walk, n_hit, n_pf, n_gpf);
    chk("every outcome happened", n_walk > 0 && n_hit > 0 && n_pf > 0 && n_gpf > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
