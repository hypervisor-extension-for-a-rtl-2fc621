// tlb_tb: self-checking test of the native/guest TLB.
//
// Directed cases: ASID and global matching, the V bit separating native and
// guest entries, VMID matching, 2 MiB and 1 GiB entries (PPN and guest PPN
// rebuilt from the address), the three flush kinds with and without address
// and ASID narrowing, and replacement once all entries are full (the number
// of entries that still hit must equal the TLB size).
module tlb_tb;
  import hyp_pkg::*;
  localparam int unsigned N = 8;   // the default number of entries

  logic              clk = 1'b0, rst_n = 1'b0;
  logic [TAG_W-1:0]  lk_vpn = '0;
  logic              lk_virt = 1'b0;
  logic [ASID_W-1:0] lk_asid = '0;
  logic [VMID_W-1:0] lk_vmid = '0;
  logic              lk_hit;
  xlat_t             lk_xlat;
  logic              fill_valid = 1'b0;
  logic [TAG_W-1:0]  fill_vpn = '0;
  logic              fill_virt = 1'b0;
  logic [ASID_W-1:0] fill_asid = '0;
  logic [VMID_W-1:0] fill_vmid = '0;
  xlat_t             fill_xlat = '0;
  logic              fl_valid = 1'b0;
  logic [1:0]        fl_kind = '0;
  logic              fl_use_addr = 1'b0, fl_use_asid = 1'b0, fl_use_vmid = 1'b0;
  logic [TAG_W-1:0]  fl_vpn = '0;
  logic [ASID_W-1:0] fl_asid = '0;
  logic [VMID_W-1:0] fl_vmid = '0;
  int checks = 0, failures = 0;

  tlb dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic xlat_t mk(logic [43:0] ppn, logic [28:0] gppn, logic [1:0] size, logic g);
    xlat_t t = '0;
    t.s1_en = 1'b1; t.r = 1'b1; t.w = 1'b1; t.d = 1'b1; t.g = g;
    t.ppn = ppn; t.gppn = gppn; t.size = size;
    return t;
  endfunction

  task automatic fill(logic [28:0] vpn, logic virt, logic [15:0] asid, logic [13:0] vmid, xlat_t t);
    @(negedge clk);
    fill_valid = 1'b1; fill_vpn = vpn; fill_virt = virt; fill_asid = asid; fill_vmid = vmid;
    fill_xlat = t;
    @(negedge clk);
    fill_valid = 1'b0;
  endtask

  task automatic flush(logic [1:0] kind, logic ua, logic [28:0] vpn, logic uas, logic [15:0] asid,
                       logic uv, logic [13:0] vmid);
    @(negedge clk);
    fl_valid = 1'b1; fl_kind = kind; fl_use_addr = ua; fl_vpn = vpn;
    fl_use_asid = uas; fl_asid = asid; fl_use_vmid = uv; fl_vmid = vmid;
    @(negedge clk);
    fl_valid = 1'b0;
  endtask

  task automatic look(string what, logic [28:0] vpn, logic virt, logic [15:0] asid, logic [13:0] vmid,
                      logic exp_hit, logic [43:0] exp_ppn = '0, logic [28:0] exp_gppn = '0);
    lk_vpn = vpn; lk_virt = virt; lk_asid = asid; lk_vmid = vmid;
    #1;
    checks++;
    if (lk_hit !== exp_hit || (exp_hit && (lk_xlat.ppn !== exp_ppn || lk_xlat.gppn !== exp_gppn))) begin
      failures++;
      $display("FAIL %s: hit=%0d ppn=%h gppn=%h expected hit=%0d ppn=%h gppn=%h",
               what, lk_hit, lk_xlat.ppn, lk_xlat.gppn, exp_hit, exp_ppn, exp_gppn);
    end
  endtask

  initial begin
    int hits;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    look("empty", 29'h100, 0, 1, 0, 0);
    // native 4 KiB entry, ASID 1
    fill(29'h100, 0, 16'd1, 0, mk(44'hA_BCDE, 29'h0, 2'd0, 1'b0));
    look("native hit",         29'h100, 0, 1, 0, 1, 44'hA_BCDE, 29'h0);
    look("other ASID",         29'h100, 0, 2, 0, 0);
    look("guest lookup",       29'h100, 1, 1, 0, 0);
    look("neighbour page",     29'h101, 0, 1, 0, 0);
    // global native entry
    fill(29'h200, 0, 16'd5, 0, mk(44'h7777, 29'h0, 2'd0, 1'b1));
    look("global any ASID",    29'h200, 0, 9, 0, 1, 44'h7777, 29'h0);
    // 2 MiB guest entry, VMID 3: PPN and GPPN of the 4 KiB page inside it
    fill(29'h0_4A00, 1, 16'd1, 14'd3, mk(44'h12_3400, 29'h0_8200, 2'd1, 1'b0));
    look("2M guest hit",       29'h0_4A7F, 1, 1, 3, 1, 44'h12_347F, 29'h0_827F);
    look("2M other VMID",      29'h0_4A7F, 1, 1, 4, 0);
    look("2M outside",         29'h0_4C00, 1, 1, 3, 0);
    // 1 GiB native entry
    fill(29'h0_C_0000, 0, 16'd1, 0, mk(44'h40_0000, 29'h0, 2'd2, 1'b0));
    look("1G hit",             29'h0_D_2345, 0, 1, 0, 1, 44'h41_2345, 29'h1_2345);
    // SFENCE.VMA, narrowed to ASID 1: the global entry survives, the guest entry too
    flush(2'd0, 0, 0, 1, 16'd1, 0, 0);
    look("after sfence asid",  29'h100, 0, 1, 0, 0);
    look("global survives",    29'h200, 0, 9, 0, 1, 44'h7777, 29'h0);
    look("guest survives",     29'h0_4A10, 1, 1, 3, 1, 44'h12_3410, 29'h0_8210);
    // HFENCE.VVMA for another VMID: nothing; for VMID 3 at an address: the 2 MiB page
    flush(2'd1, 0, 0, 0, 0, 1, 14'd4);
    look("vvma other vmid",    29'h0_4A10, 1, 1, 3, 1, 44'h12_3410, 29'h0_8210);
    flush(2'd1, 1, 29'h0_4A55, 0, 0, 1, 14'd3);
    look("vvma by address",    29'h0_4A10, 1, 1, 3, 0);
    // HFENCE.GVMA (all VMIDs) removes guest entries only
    fill(29'h300, 1, 16'd1, 14'd7, mk(44'h999, 29'h555, 2'd0, 1'b0));
    look("guest 2",            29'h300, 1, 1, 7, 1, 44'h999, 29'h555);
    flush(2'd2, 0, 0, 0, 0, 0, 0);
    look("after gvma",         29'h300, 1, 1, 7, 0);
    look("native after gvma",  29'h200, 0, 9, 0, 1, 44'h7777, 29'h0);
    // replacement: fill 2N distinct pages, exactly N must remain, the last one among them
    flush(2'd0, 0, 0, 0, 0, 0, 0);
    for (int i = 0; i < 2 * N; i++)
      fill(29'h1000 + 29'(i), 0, 16'd2, 0, mk(44'h5000 + 44'(i), 29'h0, 2'd0, 1'b0));
    hits = 0;
    for (int i = 0; i < 2 * N; i++) begin
      lk_vpn = 29'h1000 + 29'(i); lk_virt = 0; lk_asid = 2; #1;
      if (lk_hit) begin
        hits++;
        checks++;
        if (lk_xlat.ppn !== 44'h5000 + 44'(i)) begin failures++; $display("FAIL replacement data %0d", i); end
      end
    end
    checks++;
    if (hits != N) begin failures++; $display("FAIL %0d entries hit after overfill, expected %0d", hits, N); end
    look("last fill present",  29'h1000 + 29'(2 * N - 1), 0, 2, 0, 1, 44'h5000 + 44'(2 * N - 1), 29'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
