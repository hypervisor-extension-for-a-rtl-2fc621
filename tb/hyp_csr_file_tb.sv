// hyp_csr_file_tb: self-checking test of the CSR file with the hypervisor
// registers, the VS redirection, the access rules and the trap/return updates.
//
// A directed scenario: M configures delegation and vectors, MRETs into VS,
// the guest's S-CSR accesses land in the VS copies, H and M accesses fault,
// a delegated page fault is taken in VS, a guest page fault in HS (with htval,
// hstatus.SPV/SPVP/GVA), SRET returns from HS to VS and from VS to VU, an
// ECALL from VU goes to VS, an ECALL from VS to HS, and a trap from HS to M.
// It also covers the read/set/clear forms, the read-only hgeip and the
// hypervisor registers that are only stored (htimedelta, hcounteren) or read
// as zero (hgeie, henvcfg).
// Every expected value is written out in the test.
module hyp_csr_file_tb;
  import hyp_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        csr_valid = 1'b0;
  csr_op_e     csr_op = CSR_RW;
  logic [11:0] csr_addr = '0;
  logic [63:0] csr_wdata = '0, csr_rdata;
  logic        csr_illegal, csr_virtual;
  logic        trap_valid = 1'b0, trap_is_int = 1'b0, trap_gva = 1'b0;
  logic [5:0]  trap_code = '0;
  logic [63:0] trap_epc = '0, trap_tval = '0, trap_gpa = '0;
  priv_mode_t  trap_target, mode;
  logic [63:0] trap_pc;
  logic        mret = 1'b0, sret = 1'b0;
  logic [63:0] ret_pc, satp, vsatp, hgatp, mstatus, vsstatus;
  int checks = 0, failures = 0;

  hyp_csr_file dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect64(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // one CSR instruction; returns the old value and the exception flags
  task automatic csr(csr_op_e op, logic [11:0] a, logic [63:0] wd,
                     output logic [63:0] rd, output logic ill, output logic vi);
    @(negedge clk);
    csr_valid = 1'b1; csr_op = op; csr_addr = a; csr_wdata = wd;
    #1;
    rd = csr_rdata; ill = csr_illegal; vi = csr_virtual;
    @(negedge clk);
    csr_valid = 1'b0;
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] wd);
    logic [63:0] rd; logic ill, vi;
    csr(CSR_RW, a, wd, rd, ill, vi);
    checks++;
    if (ill || vi) begin failures++; $display("FAIL write %h raised an exception", a); end
  endtask

  task automatic rd_expect(logic [11:0] a, logic [63:0] exp);
    logic [63:0] rd; logic ill, vi;
    csr(CSR_RS, a, 64'h0, rd, ill, vi);
    expect64($sformatf("read %h", a), {rd[63:2], rd[1:0]}, exp);
    checks++;
    if (ill || vi) begin failures++; $display("FAIL read %h raised an exception", a); end
  endtask

  task automatic expect_exc(logic [11:0] a, logic exp_ill, logic exp_vi);
    logic [63:0] rd; logic ill, vi;
    csr(CSR_RW, a, 64'h1234, rd, ill, vi);
    checks++;
    if (ill !== exp_ill || vi !== exp_vi) begin
      failures++;
      $display("FAIL access %h in mode %p: illegal=%0d virtual=%0d expected %0d/%0d",
               a, mode, ill, vi, exp_ill, exp_vi);
    end
  endtask

  task automatic take_trap(logic is_int, logic [5:0] code, logic [63:0] epc, logic [63:0] tval,
                           logic [63:0] gpa, logic gva, priv_mode_t exp_t, logic [63:0] exp_pc);
    @(negedge clk);
    trap_valid = 1'b1; trap_is_int = is_int; trap_code = code;
    trap_epc = epc; trap_tval = tval; trap_gpa = gpa; trap_gva = gva;
    #1;
    checks++;
    if (trap_target !== exp_t) begin
      failures++; $display("FAIL trap %0d handler %p expected %p", code, trap_target, exp_t);
    end
    expect64($sformatf("trap %0d vector", code), trap_pc, exp_pc);
    @(negedge clk);
    trap_valid = 1'b0;
    checks++;
    if (mode !== exp_t) begin failures++; $display("FAIL mode after trap %p", mode); end
  endtask

  task automatic xret(logic is_m, logic [63:0] exp_pc, priv_mode_t exp_mode);
    @(negedge clk);
    mret = is_m; sret = !is_m;
    #1;
    expect64("return pc", ret_pc, exp_pc);
    @(negedge clk);
    mret = 1'b0; sret = 1'b0;
    checks++;
    if (mode !== exp_mode) begin
      failures++; $display("FAIL mode after xRET %p expected %p", mode, exp_mode);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- reset state, M mode -----------------------------------------------
    checks++; if (mode !== MODE_M) begin failures++; $display("FAIL reset mode"); end
    rd_expect(CSR_MISA, 64'h8000_0000_0014_1185);
    rd_expect(CSR_MSTATUS, 64'h0000_000A_0000_1800);
    // WARL masks
    wr(CSR_MEDELEG, '1);           rd_expect(CSR_MEDELEG, 64'h00F0_B7FF);
    wr(CSR_HEDELEG, '1);           rd_expect(CSR_HEDELEG, 64'h0000_B1FF);
    wr(CSR_HIDELEG, '1);           rd_expect(CSR_HIDELEG, 64'h444);
    wr(CSR_HGATP, 64'h8123_4567_89AB_CDEF);
    rd_expect(CSR_HGATP, 64'h8123_4567_89AB_CDEC);   // bits 59:58 and PPN[1:0] zero
    begin   // set and clear forms
      logic [63:0] rd; logic ill, vi;
      wr(CSR_MSCRATCH, 64'hF0);
      csr(CSR_RS, CSR_MSCRATCH, 64'h0F, rd, ill, vi);  expect64("csrrs old", rd, 64'hF0);
      csr(CSR_RC, CSR_MSCRATCH, 64'h3C, rd, ill, vi);  expect64("csrrc old", rd, 64'hFF);
      rd_expect(CSR_MSCRATCH, 64'hC3);
    end
    wr(CSR_HTIMEDELTA, 64'hFEDC_BA98_7654_3210); rd_expect(CSR_HTIMEDELTA, 64'hFEDC_BA98_7654_3210);
    wr(CSR_HCOUNTEREN, '1);        rd_expect(CSR_HCOUNTEREN, 64'hFFFF_FFFF);
    wr(CSR_HGEIE, '1);             rd_expect(CSR_HGEIE, 64'h0);   // no guest external interrupts
    wr(CSR_HENVCFG, '1);           rd_expect(CSR_HENVCFG, 64'h0);
    begin
      logic [63:0] rd; logic ill, vi;
      csr(CSR_RD, CSR_HGEIP, 64'h5, rd, ill, vi);   // read with no write: legal
      expect64("hgeip", rd, 64'h0);
      checks++;
      if (ill || vi) begin failures++; $display("FAIL read of hgeip raised an exception"); end
      csr(CSR_RD, CSR_HTIMEDELTA, 64'h5, rd, ill, vi);  // CSR_RD never writes
    end
    expect_exc(CSR_HGEIP, 1'b1, 1'b0);               // read-only: writing is illegal
    wr(CSR_SATP, 64'h9000_0000_0000_0001);           // Sv48: not supported, ignored
    rd_expect(CSR_SATP, 64'h0);
    wr(CSR_VSATP, 64'h8000_0000_0000_0042);  rd_expect(CSR_VSATP, 64'h8000_0000_0000_0042);
    expect64("vsatp port", vsatp, 64'h8000_0000_0000_0042);
    wr(CSR_MTVEC,  64'h8000_1001);           // vectored
    wr(CSR_STVEC,  64'h8000_2000);
    wr(CSR_VSTVEC, 64'h8000_3000);
    wr(CSR_HSTATUS, 64'h0010_0000);          // VTVM
    // ---- MRET into VS ---------------------------------------------------------
    wr(CSR_MSTATUS, 64'h0000_0080_0000_0800);        // MPV=1, MPP=S
    wr(CSR_MEPC, 64'h4000_0100);
    xret(1'b1, 64'h4000_0100, MODE_VS);
    expect64("mstatus after MRET", mstatus, 64'h0000_000A_0000_0080); // MPIE=1, MPP=U, MPV=0
    // ---- VS: S addresses reach the VS copies ---------------------------------
    wr(CSR_SSCRATCH, 64'h5A5A);
    wr(CSR_SSTATUS, 64'h100);                        // vsstatus.SPP=1
    expect64("vsstatus port", vsstatus, 64'h0000_0002_0000_0100);
    expect64("mstatus untouched", mstatus, 64'h0000_000A_0000_0080);
    expect_exc(CSR_HSTATUS,  1'b0, 1'b1);            // H CSR: virtual instruction
    expect_exc(CSR_HGEIP,    1'b0, 1'b1);
    expect_exc(CSR_VSSCRATCH, 1'b0, 1'b1);           // VS CSR by name: virtual instruction
    expect_exc(CSR_MSTATUS,  1'b1, 1'b0);            // M CSR: illegal
    expect_exc(CSR_SATP,     1'b0, 1'b1);            // vsatp with hstatus.VTVM
    expect_exc(12'h7C0,      1'b1, 1'b0);            // unimplemented
    // ---- page fault delegated to VS --------------------------------------------
    take_trap(1'b0, EXC_LOAD_PAGE, 64'h4000_0200, 64'hDEAD_B000, 64'h0, 1'b1, MODE_VS, 64'h8000_3000);
    rd_expect(CSR_SEPC,   64'h4000_0200);            // vsepc through the S address
    rd_expect(CSR_SCAUSE, 64'd13);
    rd_expect(CSR_STVAL,  64'hDEAD_B000);
    rd_expect(CSR_SSTATUS, 64'h0000_0002_0000_0100); // SPP=1 (from VS), SIE=SPIE=0
    // ---- guest page fault: not delegable to VS, handled in HS -------------------
    take_trap(1'b0, EXC_LOAD_GUEST, 64'h4000_0300, 64'h1000, 64'h0000_0123_4000, 1'b1,
              MODE_HS, 64'h8000_2000);
    rd_expect(CSR_SCAUSE, 64'd21);
    rd_expect(CSR_SEPC,   64'h4000_0300);
    rd_expect(CSR_HTVAL,  64'h0000_0048_D000);       // GPA >> 2
    rd_expect(CSR_HSTATUS, 64'h0000_0002_0010_01C0); // VSXL=2 VTVM SPVP SPV GVA
    rd_expect(CSR_SSCRATCH, 64'h0);                  // HS sees its own sscratch
    rd_expect(CSR_VSSCRATCH, 64'h5A5A);
    expect_exc(CSR_MEPC, 1'b1, 1'b0);                // HS cannot reach M CSRs
    rd_expect(CSR_HTIMEDELTA, 64'hFEDC_BA98_7654_3210);   // H CSRs are HS-level
    // ---- SRET from HS back to VS --------------------------------------------
    rd_expect(CSR_SSTATUS, 64'h0000_0002_0000_0100); // SPP=1
    xret(1'b0, 64'h4000_0300, MODE_VS);
    rd_expect(CSR_SSTATUS, 64'h0000_0002_0000_0100); // vsstatus unchanged by the HS SRET
    // ---- SRET from VS to VU (vsstatus.SPP cleared) ----------------------------
    wr(CSR_SEPC, 64'h1_0000);
    wr(CSR_SSTATUS, 64'h0);
    xret(1'b0, 64'h1_0000, MODE_VU);
    expect_exc(CSR_SSCRATCH, 1'b0, 1'b1);            // VU: S CSR is a virtual instruction
    // ---- ECALL from VU goes to VS, ECALL from VS to HS ---------------------------
    take_trap(1'b0, EXC_ECALL_U, 64'h1_0004, 64'h0, 64'h0, 1'b0, MODE_VS, 64'h8000_3000);
    rd_expect(CSR_SCAUSE, 64'd8);
    rd_expect(CSR_SSTATUS, 64'h0000_0002_0000_0000); // SPP=0: came from VU
    take_trap(1'b0, EXC_ECALL_VS, 64'h4000_0400, 64'h0, 64'h0, 1'b0, MODE_HS, 64'h8000_2000);
    rd_expect(CSR_SCAUSE, 64'd10);
    // ---- HS to M: interrupt, vectored mtvec ------------------------------------
    take_trap(1'b1, 6'd7, 64'h8000_2000, 64'h0, 64'h0, 1'b0, MODE_M, 64'h8000_1000 + 64'd28);
    rd_expect(CSR_MCAUSE, 64'h8000_0000_0000_0007);
    rd_expect(CSR_MEPC,   64'h8000_2000);
    rd_expect(CSR_MSTATUS, 64'h0000_000A_0000_0900); // MPP=S, MPV=0, SPP=1, GVA=0
    // ---- MRET to U: U cannot touch S CSRs --------------------------------------
    wr(CSR_MSTATUS, 64'h0);
    xret(1'b1, 64'h8000_2000, MODE_U);
    expect_exc(CSR_SSCRATCH, 1'b1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
