// tb_tlb_miss_handler: self-checking test of the access path (TLB hit path, miss handling,
// access check and TLB fill).
//
// The handler is connected to a TLB and to models of the page walker (random latency, some
// pages unmapped) and of the EPCM (one-cycle read). Four contexts are run in turn: untrusted
// code, an ordinary enclave, a bi-enclave and a bi-enclave that co-owns shared pages; the TLB
// is flushed on every context change, as the mode controller does. Each response is compared
// with a reference check, and whether it was a hit or a miss is predicted from the pages
// filled since the last flush. Latency is checked: 1 cycle for a hit; for a miss, the walker
// model answers walk_lat cycles after it sees the request and the handler responds 3 cycles
// after that answer, walk_lat + 4 cycles after acceptance; a walk fault (unmapped page) is
// answered right after the walk, walk_lat + 2 cycles after acceptance.
module tb_tlb_miss_handler;
  import stockade_pkg::*;

  localparam ppn_t        PRM_BASE = ppn_t'('h80000);
  localparam int unsigned PRM_N    = 32768;
  localparam ppn_t        EPC_BASE = ppn_t'('h80000);
  localparam int unsigned EPC_N    = 23936;
  localparam int unsigned IDX_W    = $clog2(EPC_N);
  localparam vpn_t        ELR      = vpn_t'('h10000);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              req_valid, req_ready, resp_valid, resp_fault, resp_abort, resp_xd;
  logic [VA_W-1:0]   req_va;
  acc_t              req_acc;
  logic [PA_W-1:0]   resp_pa;
  logic              enclave_mode, bi_enclave;
  eid_t              cur_eid;
  vpn_t              elrange_base, elrange_pages;
  logic              walk_req_valid, walk_resp_valid, walk_resp_fault;
  vpn_t              walk_req_vpn;
  ppn_t              walk_resp_ppn;
  logic              epcm_rd_en;
  logic [IDX_W-1:0]  epcm_rd_idx;
  epcm_entry_t       epcm_rd_entry;
  vpn_t              tlb_lk_vpn, tlb_fill_vpn;
  ppn_t              tlb_lk_ppn, tlb_fill_ppn;
  logic              tlb_lk_hit, tlb_lk_xd, tlb_lk_abort, tlb_fill_en, tlb_fill_xd, tlb_fill_abort;
  logic              chk_valid, busy, flush;
  verdict_t          chk_verdict;
  why_t              chk_why;

  tlb_miss_handler #(.PRM_BASE_PPN (PRM_BASE), .PRM_PAGES (PRM_N), .EPC_BASE_PPN (EPC_BASE),
                     .EPC_PAGES (EPC_N)) dut (.*);

  tlb #(.ENTRIES (64)) u_tlb (
    .clk (clk), .rst_n (rst_n), .lk_vpn (tlb_lk_vpn), .lk_hit (tlb_lk_hit), .lk_ppn (tlb_lk_ppn),
    .lk_xd (tlb_lk_xd), .lk_abort (tlb_lk_abort), .fill_en (tlb_fill_en), .fill_vpn (tlb_fill_vpn),
    .fill_ppn (tlb_fill_ppn), .fill_xd (tlb_fill_xd), .fill_abort (tlb_fill_abort), .flush (flush)
  );

  // ---------------- models ----------------
  ppn_t        pt    [vpn_t];     // OS page table
  epcm_entry_t epcmm [int];       // EPCM contents

  always_ff @(posedge clk) if (epcm_rd_en)
    epcm_rd_entry <= epcmm.exists(int'(epcm_rd_idx)) ? epcmm[int'(epcm_rd_idx)] : '0;

  int walk_lat, walk_cnt;
  always @(posedge clk) begin
    walk_resp_valid <= 1'b0;
    if (walk_req_valid && !walk_resp_valid) begin
      if (walk_cnt == walk_lat - 1) begin
        walk_resp_valid <= 1'b1;
        walk_resp_fault <= !pt.exists(walk_req_vpn);
        walk_resp_ppn   <= pt.exists(walk_req_vpn) ? pt[walk_req_vpn] : '0;
        walk_cnt        <= 0;
      end else walk_cnt <= walk_cnt + 1;
    end
  end

  // ---------------- reference ----------------
  function automatic verdict_t ref_verdict(vpn_t v, ppn_t p);
    longint unsigned pl = longint'(p);
    bit prm = pl >= longint'(PRM_BASE) && pl < longint'(PRM_BASE) + PRM_N;
    bit epc = pl >= longint'(EPC_BASE) && pl < longint'(EPC_BASE) + EPC_N;
    bit elr = v >= elrange_base && longint'(v) < longint'(elrange_base) + longint'(elrange_pages);
    epcm_entry_t e = (epc && epcmm.exists(int'(p - EPC_BASE))) ? epcmm[int'(p - EPC_BASE)] : '0;
    bit own = e.owner == cur_eid || (e.coowner_valid && e.coowner == cur_eid);
    if (!enclave_mode) return prm ? VD_ABORT : VD_INSERT;
    if (prm) begin
      if (!epc || !e.valid || e.blocked || !own || e.vpn != v) return VD_PAGEFAULT;
      return VD_INSERT;
    end
    if (elr) return VD_PAGEFAULT;
    return bi_enclave ? VD_ABORT : VD_INSERT_XD;
  endfunction

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0;
  int vd_seen [4];
  bit filled [vpn_t];

  task automatic do_flush();
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    filled.delete();
  endtask

  task automatic access(vpn_t v, acc_t a);
    int lat;
    bit exp_hit, mapped;
    verdict_t ev;
    bit ef, eab, exd;
    @(negedge clk);
    req_valid = 1; req_va = {v, 12'h234}; req_acc = a;
    exp_hit = filled.exists(v);
    mapped  = pt.exists(v);
    ev      = mapped ? ref_verdict(v, pt[v]) : VD_PAGEFAULT;
    @(posedge clk); #1 req_valid = 0;
    lat = 1;                                   // clock edges from acceptance to response
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    ef  = !mapped || ev == VD_PAGEFAULT || (ev == VD_INSERT_XD && a == ACC_EXEC);
    eab = mapped && ev == VD_ABORT;
    exd = mapped && ev == VD_INSERT_XD && a == ACC_EXEC;
    checks++;
    if (resp_fault !== ef || resp_abort !== eab || resp_xd !== exd ||
        (!ef && resp_pa !== {eab ? ppn_t'('1) : pt[v], 12'h234})) begin
      failures++;
      if (failures < 10) $display("vpn %h acc %s: fault %0d/%0d abort %0d/%0d xd %0d/%0d", v, a.name(),
                                  resp_fault, ef, resp_abort, eab, resp_xd, exd);
    end
    checks++;
    if (lat != (exp_hit ? 1 : mapped ? walk_lat + 4 : walk_lat + 2)) begin
      failures++;
      if (failures < 10) $display("vpn %h latency %0d, hit expected %0d, walk %0d", v, lat, exp_hit, walk_lat);
    end
    if (exp_hit) n_hit++; else begin n_miss++; if (mapped) vd_seen[ev]++; end
    if (mapped && ev != VD_PAGEFAULT) filled[v] = 1;
  endtask

  task automatic set_ctx(bit em, bit bi, eid_t e);
    enclave_mode = em; bi_enclave = bi; cur_eid = e;
    do_flush();
  endtask

  localparam eid_t E1 = EPC_BASE + 1, E2 = EPC_BASE + 2;

  initial begin
    foreach (vd_seen[i]) vd_seen[i] = 0;
    req_valid = 0; req_va = '0; req_acc = ACC_READ; flush = 0;
    walk_resp_valid = 0; walk_resp_fault = 0; walk_resp_ppn = '0; walk_cnt = 0; walk_lat = 2;
    enclave_mode = 0; bi_enclave = 0; cur_eid = '0;
    elrange_base = ELR; elrange_pages = 16;
    // ELRANGE pages 0..15 of E1 -> EPC pages 100..115
    for (int i = 0; i < 16; i++) begin
      epcm_entry_t e;
      e = '0;
      e.valid = (i != 3); e.pt = PT_REG; e.owner = E1; e.vpn = ELR + vpn_t'(i);
      e.blocked = (i == 5);
      if (i == 7) e.vpn = ELR + 100;                       // VA mismatch
      if (i == 9 || i == 10) begin e.coowner_valid = 1; e.coowner = E2; end  // shared with E2
      if (i == 11) e.owner = E2;                           // owned by someone else
      epcmm[100 + i] = e;
      if (i != 14) pt[ELR + vpn_t'(i)] = EPC_BASE + ppn_t'(100 + i);
    end
    pt[ELR + 15] = EPC_BASE + ppn_t'(EPC_N + 5);           // PRM but not EPC
    for (int i = 0; i < 8; i++) pt[vpn_t'('h20000 + i)] = ppn_t'('h1000 + i);   // untrusted DRAM
    pt[vpn_t'('h20010)] = EPC_BASE + ppn_t'(101);          // untrusted alias onto EPC
    pt[ELR + 20] = ppn_t'('h2000);                         // beyond ELRANGE end, DRAM
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      case (phase)
        0: set_ctx(0, 0, '0);
        1: set_ctx(1, 0, E1);
        2: set_ctx(1, 1, E1);
        default: set_ctx(1, 1, E2);
      endcase
      for (int k = 0; k < 400; k++) begin
        vpn_t v;
        int r;
        r = $urandom_range(0, 3);
        if (r == 0)      v = vpn_t'('h20000 + $urandom_range(0, 8)) ;
        else if (r == 1) v = vpn_t'('h20010);
        else if (r == 2) v = ELR + vpn_t'($urandom_range(0, 20));
        else             v = ELR + vpn_t'($urandom_range(0, 15));
        if (r == 0 && v == vpn_t'('h20008)) v = vpn_t'('h20010);
        walk_lat = $urandom_range(1, 6);
        access(v, acc_t'($urandom_range(0, 2)));
        if ($urandom_range(0, 60) == 0) do_flush();
      end
    end
    foreach (vd_seen[i]) begin
      checks++;
      if (vd_seen[i] == 0) begin failures++; $display("verdict %0d never seen", i); end
    end
    checks++;
    if (n_hit == 0 || n_miss == 0) begin failures++; $display("hits %0d misses %0d", n_hit, n_miss); end
    $display("hits=%0d misses=%0d insert=%0d xd=%0d abort=%0d pagefault=%0d", n_hit, n_miss,
             vd_seen[0], vd_seen[1], vd_seen[2], vd_seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
