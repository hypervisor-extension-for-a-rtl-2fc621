// ptw_2stage_tb: self-checking test of the Sv39 / two-stage page-table walker.
//
// The testbench builds page tables in a sparse memory model: a native Sv39
// tree, a G-stage Sv39x4 tree (1 GiB, 2 MiB and 4 KiB guest-physical pages,
// some with faulting bits) and a guest VS-stage tree that lives in
// guest-physical memory. It then runs 600 walks over a pool of addresses in
// six regimes (native; guest with both stages, with a Bare VS-stage, with a
// Bare G-stage, with both Bare; guest with all VS tables in 4 KiB G pages) and compares fault kind, faulting GPA, host
// and guest page numbers, page size, leaf permissions and the number of
// memory reads with a procedural reference walker. The memory model answers
// with random ready and 1-3 cycle latency. Walks whose VS tables sit behind
// 4 KiB G-stage pages take the full 15 reads; at least one must occur.
module ptw_2stage_tb;
  import hyp_pkg::*;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             req_valid = 1'b0, req_ready;
  logic [63:0]      req_vaddr = '0;
  logic             req_virt = 1'b0;
  logic [63:0]      satp = '0, vsatp = '0, hgatp = '0;
  logic             done;
  flt_e             fault;
  logic [GPA_W-1:0] fault_gpa;
  logic             fault_final;
  xlat_t            xlat;
  logic             mem_req_valid, mem_req_ready = 1'b0;
  logic [PA_W-1:0]  mem_req_addr;
  logic             mem_resp_valid = 1'b0;
  logic [63:0]      mem_resp_data = '0;
  int checks = 0, failures = 0;

  ptw_2stage dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory ---------------------------------------------------------------
  logic [63:0] mem [logic [52:0]];
  int          dut_reads;

  function automatic logic [63:0] rd(logic [55:0] pa);
    return mem.exists(pa[55:3]) ? mem[pa[55:3]] : 64'h0;
  endfunction

  initial begin
    forever begin
      @(negedge clk);
      mem_req_ready = 1'($urandom);
      mem_resp_valid = 1'b0;
      @(posedge clk);
      if (mem_req_valid && mem_req_ready) begin
        logic [55:0] a;
        a = mem_req_addr;
        dut_reads++;
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

  // ---- page-table construction ------------------------------------------------
  localparam logic [55:0] N_ROOT  = 56'h8000_0000;     // native root
  localparam logic [55:0] G_ROOT  = 56'h9000_0000;     // G-stage root, 16 KiB
  localparam logic [55:0] VS_ROOT = 56'h8010_0000;     // VS root, a GPA
  localparam logic [55:0] VS_WIN_GPA = 56'h8000_0000;  // G maps this 1 GiB GPA window
  localparam logic [55:0] VS_WIN_HPA = 56'h2_0000_0000;
  localparam logic [7:0]  F_ALL  = 8'hDF;  // D A U X W R V
  localparam logic [7:0]  F_SUP  = 8'hCF;  // D A X W R V
  localparam logic [7:0]  F_NOA  = 8'h9F;  // D U X W R V, A clear
  localparam logic [7:0]  F_XO   = 8'hD9;  // D A U X V
  localparam logic [7:0]  F_PTR  = 8'h01;

  logic [55:0] n_next = N_ROOT + 56'h1000, g_next = G_ROOT + 56'h4000, vs_next = VS_ROOT + 56'h1000;

  function automatic logic [55:0] tab2pa(logic [55:0] a, int space);
    return (space == 2) ? a - VS_WIN_GPA + VS_WIN_HPA : a;   // space 2: VS tables (GPA)
  endfunction

  function automatic logic [10:0] idx(logic [63:0] va, int l, int space);
    case (l)
      2: return (space == 1) ? va[40:30] : {2'b00, va[38:30]};
      1: return {2'b00, va[29:21]};
      default: return {2'b00, va[20:12]};
    endcase
  endfunction

  // space 0: native, 1: G-stage, 2: VS-stage
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

  // ---- reference walker ------------------------------------------------------
  int ref_reads;

  task automatic g_walk(logic [63:0] gpa, logic implicit_rd, output logic ok,
                        output logic [43:0] hppn, output logic [1:0] lvl_o, output pte_t leaf);
    logic [55:0] a;
    pte_t p;
    ok = 1'b0; hppn = '0; lvl_o = 2'd0; leaf = '0;
    if (hgatp[63:60] == 4'd0) begin ok = 1'b1; hppn = gpa[55:12]; lvl_o = 2'd2; return; end
    if (gpa[63:41] != 0) return;
    a = {hgatp[43:0], 12'd0};
    for (int l = 2; l >= 0; l--) begin
      p = pte_t'(rd(a + {42'd0, idx(gpa, l, 1), 3'd0}));
      ref_reads++;
      if (!p.v || (p.w && !p.r) || p.hi != 0) return;
      if (p.r || p.x) begin
        if ((l == 2 && p.ppn[17:0] != 0) || (l == 1 && p.ppn[8:0] != 0)) return;
        if (!p.u || !p.a || (implicit_rd && !p.r)) return;
        hppn = p.ppn;
        if (l >= 1) hppn[8:0]  = gpa[20:12];
        if (l == 2) hppn[17:9] = gpa[29:21];
        ok = 1'b1; lvl_o = 2'(l); leaf = p;
        return;
      end
      a = {p.ppn, 12'd0};
    end
  endtask

  task automatic ref_walk(logic [63:0] va, logic virt, output flt_e f, output logic [40:0] fgpa,
                          output xlat_t t);
    logic s1, s2, ok;
    logic [63:0] gpa;
    logic [55:0] a;
    logic [43:0] hppn;
    logic [1:0]  gl;
    pte_t p, gleaf;
    logic [1:0] s1size;
    f = FLT_NONE; fgpa = '0; t = '0; ref_reads = 0;
    s1 = !virt || vsatp[63:60] == 4'd8;
    s2 = virt && hgatp[63:60] == 4'd8;
    t.s1_en = s1; t.s2_en = s2;
    s1size = 2'd2;
    if (s1) begin
      if (va[63:38] != '0 && va[63:38] != '1) begin f = FLT_PAGE; return; end
      a = {(virt ? vsatp[43:0] : satp[43:0]), 12'd0};
      gpa = 'x;
      for (int l = 2; l >= 0; l--) begin
        logic [55:0] pa;
        pa = a + {42'd0, idx(va, l, 0), 3'd0};
        if (s2) begin
          g_walk({8'd0, pa}, 1'b1, ok, hppn, gl, gleaf);
          if (!ok) begin f = FLT_GUEST; fgpa = pa[40:0]; return; end
          pa = {hppn, pa[11:0]};
        end
        p = pte_t'(rd(pa));
        ref_reads++;
        if (!p.v || (p.w && !p.r) || p.hi != 0) begin f = FLT_PAGE; return; end
        if (p.r || p.x) begin
          if ((l == 2 && p.ppn[17:0] != 0) || (l == 1 && p.ppn[8:0] != 0) || !p.a) begin
            f = FLT_PAGE; return;
          end
          gpa = {8'd0, p.ppn, va[11:0]};
          if (l >= 1) gpa[20:12] = va[20:12];
          if (l == 2) gpa[29:21] = va[29:21];
          t.r = p.r; t.w = p.w; t.x = p.x; t.u = p.u; t.g = p.g; t.d = p.d;
          s1size = 2'(l);
          break;
        end
        if (l == 0) begin f = FLT_PAGE; return; end
        a = {p.ppn, 12'd0};
      end
    end else begin
      gpa = va;
    end
    t.gppn = gpa[40:12];
    t.size = s1size;
    if (s2) begin
      if (gpa[63:41] != 0) begin f = FLT_GUEST; fgpa = gpa[40:0]; return; end
      g_walk(gpa, 1'b0, ok, hppn, gl, gleaf);
      if (!ok) begin f = FLT_GUEST; fgpa = gpa[40:0]; return; end
      t.ppn = hppn;
      t.gr = gleaf.r; t.gw = gleaf.w; t.gx = gleaf.x; t.gd = gleaf.d;
      if (gl < t.size) t.size = gl;
    end else begin
      t.ppn = gpa[55:12];
    end
  endtask

  // ---- one walk ---------------------------------------------------------------
  int walks_ok = 0, walks_pf = 0, walks_gpf = 0, walks15 = 0;

  task automatic walk(logic [63:0] va, logic virt, string what);
    flt_e f; logic [40:0] fg; xlat_t t;
    ref_walk(va, virt, f, fg, t);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1; req_vaddr = va; req_virt = virt;
    dut_reads = 0;
    @(posedge clk); #1;
    req_valid = 1'b0;
    while (!done) @(posedge clk) #1;
    checks++;
    if (fault !== f || (f == FLT_GUEST && fault_gpa !== fg) ||
        (f == FLT_NONE && xlat !== t) || dut_reads != ref_reads) begin
      failures++;
      $display("FAIL %s va=%h virt=%0d: fault=%0d gpa=%h xlat=%h reads=%0d; expected %0d %h %h %0d",
               what, va, virt, fault, fault_gpa, xlat, dut_reads, f, fg, t, ref_reads);
    end
    if (f == FLT_NONE) walks_ok++; else if (f == FLT_PAGE) walks_pf++; else walks_gpf++;
    if (ref_reads == 15) walks15++;
  endtask

  logic [63:0] pool [$];

  initial begin
    // G-stage: 1 GiB window for the VS tables, 2 MiB and 4 KiB pages, faulting leaves
    map(1, 64'h8000_0000, 44'h20_0000, 2, F_ALL);          // -> 0x2_0000_0000
    map(1, 64'h4000_0000, 44'h30_0000, 1, F_ALL);          // 2 MiB -> 0x3_0000_0000
    map(1, 64'h4020_0000, 44'h30_0400, 1, F_SUP);          // 2 MiB, U clear
    map(1, 64'h1000_0000, 44'h31_0000, 0, F_ALL);
    map(1, 64'h1000_1000, 44'h31_0005, 0, F_NOA);          // A clear
    map(1, 64'h1000_2000, 44'h31_0007, 0, 8'hD3);          // read-only
    map(1, 64'h1000_3000, 44'h31_0009, 0, F_XO);           // execute-only
    map(1, 64'h1_0000_0000, 44'h40_1234, 1, F_ALL);        // misaligned 2 MiB
    // VS-stage (guest page tables, in guest-physical memory)
    map(2, 64'h1000,      44'h1_0000, 0, F_ALL);
    map(2, 64'h2000,      44'h1_0001, 0, F_ALL);
    map(2, 64'h3000,      44'h1_0002, 0, F_SUP);
    map(2, 64'h0020_0000, 44'h4_0000, 1, F_ALL);
    map(2, 64'h4000_0000, 44'h8_0000, 2, F_ALL);
    map(2, 64'h0040_0000, 44'h4_0200, 1, F_ALL);
    map(2, 64'h5000,      44'h6_0000, 0, F_ALL);           // GPA not mapped by G
    map(2, 64'h6000,      44'h1_0000, 0, F_NOA);
    map(2, 64'h8000,      44'h4000_0000, 0, F_ALL);        // GPA above 41 bits
    map(2, 64'h0060_0000, 44'h1_0003, 1, F_ALL);           // misaligned 2 MiB
    map(2, 64'h9000,      44'h10_0000, 0, F_ALL);          // GPA in the misaligned G page
    mem[(VS_WIN_HPA + 56'h10_0000 + 56'(511 * 8)) >> 3] = {10'd0, 44'h1_0003, 2'b00, F_PTR}; // VS table at an X-only GPA
    // a second guest tree whose tables all sit in 4 KiB G-stage pages
    map(1, 64'h1000_4000, 44'h3_100B, 0, F_ALL);
    map(1, 64'h1000_5000, 44'h3_100D, 0, F_ALL);
    map(1, 64'h1000_6000, 44'h3_100F, 0, F_ALL);
    mem[56'h3_100F_000 >> 3]       = {10'd0, 44'h1_0004, 2'b00, F_PTR};
    mem[56'h3_100B_000 >> 3]       = {10'd0, 44'h1_0005, 2'b00, F_PTR};
    mem[(56'h3_100D_000 + 8) >> 3] = {10'd0, 44'h1_0000, 2'b00, F_ALL};
    // native
    map(0, 64'h1000,      44'h50_0000, 0, F_SUP);
    map(0, 64'h0020_0000, 44'h50_0200, 1, F_ALL);
    map(0, 64'h4000_0000, 44'h80_0000, 2, F_SUP);

    pool = '{64'h1000, 64'h2000, 64'h3000, 64'h0020_0000, 64'h4000_0000, 64'h0040_0000,
             64'h5000, 64'h6000, 64'h7000, 64'h8000, 64'h9000, 64'h0060_0000,
             64'hFFFF_FFFF_C000_0000, 64'h0000_0080_0000_0000,
             64'h1000_0000, 64'h1000_1000, 64'h1000_3000, 64'h4000_0000, 64'h4020_0000,
             64'h8000_0000, 64'h6000_0000, 64'h0300_0000_0000};

    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // two-stage walk of a 4 KiB page: the VS tables sit in a 1 GiB G-stage page
    // (1 G-stage read + 1 VS read per level) and the data in a 4 KiB G-stage
    // page (3 reads): 9 reads
    satp  = {4'd8, 16'd0, N_ROOT[55:12]};
    vsatp = {4'd8, 16'd0, 44'h1_0006};
    hgatp = {4'd8, 2'd0, 14'd1, G_ROOT[55:12]};
    walk(64'h1234, 1'b1, "two-stage 4K, 15 reads");
    checks++;
    if (dut_reads != 15) begin failures++; $display("FAIL full two-stage walk took %0d reads", dut_reads); end
    vsatp = {4'd8, 16'd0, VS_ROOT[55:12]};
    walk(64'h1234, 1'b1, "two-stage 4K");
    checks++;
    if (dut_reads != 9) begin failures++; $display("FAIL two-stage 4K walk took %0d reads", dut_reads); end
    for (int n = 0; n < 600; n++) begin
      int regime;
      logic [63:0] va;
      regime = $urandom_range(0, 5);
      satp  = {4'd8, 16'd0, N_ROOT[55:12]};
      vsatp = {(regime == 2 || regime == 4) ? 4'd0 : 4'd8, 16'd0,
               (regime == 5) ? 44'h1_0006 : VS_ROOT[55:12]};
      hgatp = {(regime == 3 || regime == 4) ? 4'd0 : 4'd8, 2'd0, 14'd1, G_ROOT[55:12]};
      va = pool[$urandom_range(0, pool.size() - 1)] + 64'($urandom_range(0, 4095));
      if ($urandom_range(0, 3) == 0) va += 64'($urandom_range(0, 511)) << 12;
      walk(va, regime != 0, $sformatf("regime %0d", regime));
    end
    $display("walks: ok=%0d page-fault=%0d guest-page-fault=%0d 15-read=%0d",
             walks_ok, walks_pf, walks_gpf, walks15);
    checks++;
    if (walks_ok == 0 || walks_pf == 0 || walks_gpf == 0 || walks15 == 0) begin
      failures++; $display("FAIL: an outcome never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
