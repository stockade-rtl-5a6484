// tb_stockade_top: end-to-end test of the Stockade access control at its default sizes.
//
// Models around the top: an OS page table walked with a fixed latency, a memory path that
// accepts page-zeroing writes, and the unchanged SGX flows that create enclaves and add pages
// (driven through the host ports). Story:
//   1. create three enclaves: E1 and E2 as bi-enclaves, E3 as an ordinary enclave;
//   2. untrusted code can read DRAM but gets the abort page for enclave memory;
//   3. E1 runs: its own pages translate, outside memory gives the abort page, a page of E2
//      mapped into E1's range faults, EEXIT is refused, AEX leaves;
//   4. E1 offers one of its pages to E2 with ESADD (zeroed, blocked: E1 now faults on it);
//      E2 accepts with ESACCEPT and can then use the page, as can E1 again;
//   5. E3, an ordinary enclave, faults on the shared page, gets outside memory with XD set
//      and faults when executing it; EEXIT works for it.
// Each result is checked against the value the paper's rules give, and each mechanism is
// counted; a mechanism that never happened counts as a failure.
module tb_stockade_top;
  import stockade_pkg::*;

  localparam ppn_t        EPC_BASE = ppn_t'('h80000);   // default PRM/EPC placement
  localparam int unsigned EPC_N    = 23936;
  localparam int unsigned IDX_W    = $clog2(EPC_N);
  localparam int unsigned WALK_LAT = 2;
  localparam ppn_t        ABORT_PG = '1;                 // default abort page

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             ins_valid, ins_ready, ins_bi, ins_done;
  op_t              ins_op;
  eid_t             ins_secs, ins_target, cur_eid;
  ppn_t             ins_page;
  err_t             ins_err;
  logic             acc_valid, acc_ready, resp_valid, resp_fault, resp_abort, resp_xd;
  logic [VA_W-1:0]  acc_va;
  acc_t             acc_type;
  logic [PA_W-1:0]  resp_pa, zero_addr;
  logic             walk_req_valid, walk_resp_valid, walk_resp_fault;
  vpn_t             walk_req_vpn;
  ppn_t             walk_resp_ppn;
  logic             zero_valid, zero_ready;
  logic             host_epcm_wr_en, host_epcm_wr_ready, host_secs_create_en;
  logic [IDX_W-1:0] host_epcm_wr_idx, host_secs_create_idx;
  epcm_entry_t      host_epcm_wr_entry;
  vpn_t             host_secs_elrange_base, host_secs_elrange_pages;
  logic             enclave_mode, bi_enclave, tlb_flush, chk_valid;
  verdict_t         chk_verdict;
  why_t             chk_why;

  stockade_top dut (.*);

  // ---------------- OS page table and walker ----------------
  ppn_t pt [vpn_t];
  int   wcnt = 0;
  always @(posedge clk) begin
    walk_resp_valid <= 1'b0;
    if (walk_req_valid && !walk_resp_valid) begin
      if (wcnt == WALK_LAT - 1) begin
        walk_resp_valid <= 1'b1;
        walk_resp_fault <= !pt.exists(walk_req_vpn);
        walk_resp_ppn   <= pt.exists(walk_req_vpn) ? pt[walk_req_vpn] : '0;
        wcnt <= 0;
      end else wcnt <= wcnt + 1;
    end
  end

  // ---------------- memory path ----------------
  int n_zero = 0;
  assign zero_ready = 1'b1;
  always @(posedge clk) if (zero_valid && zero_ready) n_zero++;

  // ---------------- mechanism counters ----------------
  int n_flush = 0, n_hits = 0, n_walk_fault = 0, n_host_stall = 0;
  int why_cnt [11];
  always @(posedge clk) if (rst_n) begin
    if (tlb_flush) n_flush++;
    if (chk_valid) why_cnt[int'(chk_why)]++;
    if (host_epcm_wr_en && !host_epcm_wr_ready) n_host_stall++;
  end

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- drivers ----------------
  task automatic host_page(int idx, epcm_entry_t e);
    @(negedge clk);
    host_epcm_wr_en = 1; host_epcm_wr_idx = IDX_W'(idx); host_epcm_wr_entry = e;
    @(posedge clk); while (!host_epcm_wr_ready) @(posedge clk);
    #1 host_epcm_wr_en = 0;
  endtask

  task automatic host_secs(int idx, vpn_t base, vpn_t pages);
    epcm_entry_t e = '0;
    @(negedge clk);
    host_secs_create_en = 1; host_secs_create_idx = IDX_W'(idx);
    host_secs_elrange_base = base; host_secs_elrange_pages = pages;
    @(posedge clk); #1 host_secs_create_en = 0;
    e.valid = 1; e.pt = PT_SECS; e.owner = EPC_BASE + ppn_t'(idx);
    host_page(idx, e);
  endtask

  task automatic ins(op_t o, eid_t s, bit bi, ppn_t pg, eid_t tgt, err_t exp, string what);
    @(negedge clk);
    while (!ins_ready) @(negedge clk);
    ins_valid = 1; ins_op = o; ins_secs = s; ins_bi = bi; ins_page = pg; ins_target = tgt;
    @(posedge clk); #1 ins_valid = 0;
    while (!ins_done) begin @(posedge clk); #1; end
    check(ins_err == exp, $sformatf("%s: %s returned %s, expected %s", what, o.name(), ins_err.name(), exp.name()));
  endtask

  // expected outcome of an access
  typedef enum { OK, ABORT, FAULT, XDF } res_t;

  task automatic access(vpn_t v, acc_t a, res_t exp, string what);
    int lat = 1;
    res_t got;
    @(negedge clk);
    while (!acc_ready) @(negedge clk);
    acc_valid = 1; acc_va = {v, 12'h018}; acc_type = a;
    @(posedge clk); #1 acc_valid = 0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    if (lat == 1) n_hits++;
    if (resp_fault && resp_xd) got = XDF;
    else if (resp_fault)       got = FAULT;
    else if (resp_abort)       got = ABORT;
    else                       got = OK;
    check(got == exp, $sformatf("%s: access %h %s gave %s, expected %s", what, v, a.name(), got.name(), exp.name()));
    if (got == OK)    check(resp_pa == {pt[v], 12'h018}, $sformatf("%s: PA %h", what, resp_pa));
    if (got == ABORT) check(resp_pa == {ABORT_PG, 12'h018}, $sformatf("%s: abort PA %h", what, resp_pa));
    // hit: 1 cycle; walk fault: reported straight after the walk; otherwise walk + EPCM read + check
    check(lat == 1 || lat == (pt.exists(v) ? WALK_LAT + 4 : WALK_LAT + 2), $sformatf("%s: latency %0d", what, lat));
  endtask

  function automatic epcm_entry_t reg_page(eid_t own, vpn_t v);
    epcm_entry_t e = '0;
    e.valid = 1; e.pt = PT_REG; e.owner = own; e.vpn = v;
    return e;
  endfunction

  localparam eid_t E1 = EPC_BASE + 1, E2 = EPC_BASE + 2, E3 = EPC_BASE + 3;
  localparam vpn_t ELR1 = vpn_t'('h10000), ELR2 = vpn_t'('h20000), ELR3 = vpn_t'('h30000);
  localparam vpn_t OUT  = vpn_t'('h40000);          // untrusted process memory
  localparam vpn_t SHR  = ELR1 + 8;                 // E1's page that becomes shared

  initial begin
    foreach (why_cnt[i]) why_cnt[i] = 0;
    ins_valid = 0; ins_op = OP_EINIT; ins_secs = '0; ins_bi = 0; ins_page = '0; ins_target = '0;
    acc_valid = 0; acc_va = '0; acc_type = ACC_READ;
    walk_resp_valid = 0; walk_resp_fault = 0; walk_resp_ppn = '0;
    host_epcm_wr_en = 0; host_epcm_wr_idx = '0; host_epcm_wr_entry = '0;
    host_secs_create_en = 0; host_secs_create_idx = '0; host_secs_elrange_base = '0; host_secs_elrange_pages = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. enclaves and their pages (EPC pages 100.., 200.., 300..)
    host_secs(1, ELR1, 16);
    host_secs(2, ELR2, 16);
    host_secs(3, ELR3, 16);
    for (int i = 0; i < 16; i++) begin
      host_page(100 + i, reg_page(E1, ELR1 + vpn_t'(i))); pt[ELR1 + vpn_t'(i)] = EPC_BASE + ppn_t'(100 + i);
      host_page(200 + i, reg_page(E2, ELR2 + vpn_t'(i))); pt[ELR2 + vpn_t'(i)] = EPC_BASE + ppn_t'(200 + i);
      host_page(300 + i, reg_page(E3, ELR3 + vpn_t'(i))); pt[ELR3 + vpn_t'(i)] = EPC_BASE + ppn_t'(300 + i);
    end
    for (int i = 0; i < 8; i++) pt[OUT + vpn_t'(i)] = ppn_t'('h1000 + i);
    pt[ELR1 + 12] = EPC_BASE + ppn_t'(203);            // malicious OS maps E2's page into E1
    ins(OP_EINIT, E1, 1, '0, '0, ERR_NONE, "EINIT E1 bi");
    ins(OP_EINIT, E2, 1, '0, '0, ERR_NONE, "EINIT E2 bi");
    ins(OP_EINIT, E3, 0, '0, '0, ERR_NONE, "EINIT E3");

    // 2. untrusted code
    access(OUT,        ACC_READ,  OK,    "untrusted DRAM");
    access(OUT,        ACC_WRITE, OK,    "untrusted DRAM again (TLB hit)");
    access(ELR1,       ACC_READ,  ABORT, "untrusted reads E1");
    access(ELR1 + 99,  ACC_READ,  FAULT, "unmapped page");
    n_walk_fault++;
    ins(OP_ESADD, '0, 0, EPC_BASE + 100, E2, ERR_NOT_ENCLAVE, "ESADD outside enclave");

    // 3. E1 runs as a bi-enclave
    ins(OP_EENTER, E1, 0, '0, '0, ERR_NONE, "EENTER E1");
    check(enclave_mode && bi_enclave && cur_eid == E1, "E1 context");
    access(ELR1 + 1,   ACC_WRITE, OK,    "E1 own page");
    access(ELR1 + 1,   ACC_READ,  OK,    "E1 own page (TLB hit)");
    access(ELR1 + 2,   ACC_EXEC,  OK,    "E1 own code");
    access(OUT,        ACC_READ,  ABORT, "E1 reads outside: abort page");
    access(OUT + 1,    ACC_WRITE, ABORT, "E1 writes outside: abort page");
    access(OUT + 2,    ACC_EXEC,  ABORT, "E1 jumps outside: abort page");
    access(ELR1 + 12,  ACC_READ,  FAULT, "E1 on E2's page");
    access(ELR2 + 3,   ACC_READ,  FAULT, "E1 on E2's page at E2's address");
    ins(OP_EEXIT,  '0, 0, '0, '0, ERR_EEXIT_BI, "EEXIT from bi-enclave");
    check(enclave_mode, "still in E1 after refused EEXIT");
    access(ELR1 + 1,   ACC_READ,  OK,    "E1 continues after refused EEXIT");

    // 4. E1 offers SHR to E2
    access(SHR,        ACC_WRITE, OK,    "E1 writes its page before sharing");
    ins(OP_ESADD, '0, 0, EPC_BASE + 108, E3 + 100, ERR_BAD_SECS, "ESADD to a non-SECS page");
    ins(OP_ESADD, '0, 0, EPC_BASE + 200, E2, ERR_NOT_OWNER, "ESADD of E2's page by E1");
    ins(OP_ESADD, '0, 0, EPC_BASE + 108, E2, ERR_NONE, "ESADD E1->E2");
    check(n_zero == LINES_PER_PAGE, $sformatf("ESADD zeroed %0d lines", n_zero));
    access(SHR,        ACC_READ,  FAULT, "E1 on blocked page");
    ins(OP_AEX,    '0, 0, '0, '0, ERR_NONE, "AEX from E1");
    check(!enclave_mode, "AEX left E1");
    access(ELR1 + 1,   ACC_READ,  ABORT, "untrusted after AEX reads E1");
    ins(OP_EENTER, E2, 0, '0, '0, ERR_NONE, "EENTER E2");
    pt[SHR] = EPC_BASE + ppn_t'(108);
    access(SHR,        ACC_READ,  FAULT, "E2 before ESACCEPT");
    // ESACCEPT while the host keeps writing another EPCM entry: one host write must wait
    fork
      ins(OP_ESACCEPT, '0, 0, EPC_BASE + 108, '0, ERR_NONE, "ESACCEPT by E2");
      repeat (6) host_page(400, reg_page(E3, ELR3 + 15));
    join
    access(SHR,        ACC_WRITE, OK,    "E2 writes the shared page");
    access(SHR,        ACC_READ,  OK,    "E2 reads the shared page (TLB hit)");
    access(ELR2 + 4,   ACC_READ,  OK,    "E2 own page");
    access(OUT,        ACC_READ,  ABORT, "E2 outside");
    ins(OP_AEX,    '0, 0, '0, '0, ERR_NONE, "AEX from E2");
    ins(OP_ERESUME, E1, 0, '0, '0, ERR_NONE, "ERESUME E1");
    access(SHR,        ACC_READ,  OK,    "E1 reads the shared page");
    ins(OP_AEX,    '0, 0, '0, '0, ERR_NONE, "AEX from E1");

    // 5. ordinary enclave E3
    ins(OP_EENTER, E3, 0, '0, '0, ERR_NONE, "EENTER E3");
    check(enclave_mode && !bi_enclave, "E3 context");
    access(SHR,        ACC_READ,  FAULT, "E3 on shared page");
    access(ELR3,       ACC_READ,  OK,    "E3 own page");
    access(OUT + 3,    ACC_READ,  OK,    "E3 reads outside (XD)");
    access(OUT + 3,    ACC_EXEC,  XDF,   "E3 executes outside: XD (TLB hit)");
    pt[ELR3 + 15] = ppn_t'('h1234);                    // OS maps an ELRANGE page to DRAM
    access(ELR3 + 15,  ACC_READ,  FAULT, "E3 ELRANGE page not backed by EPC");
    access(ELR3 + 14,  ACC_READ,  OK,    "E3 own page 14");
    ins(OP_EEXIT,  '0, 0, '0, '0, ERR_NONE, "EEXIT from E3");
    check(!enclave_mode, "E3 left with EEXIT");
    access(ELR3,       ACC_READ,  ABORT, "untrusted right after EEXIT reads E3");
    repeat (2) @(posedge clk);

    // mechanisms
    check(why_cnt[WHY_BI_OUTSIDE] > 0,   "bi-enclave confinement (abort page) happened");
    check(why_cnt[WHY_OUT_PRM] > 0,      "untrusted access to PRM happened");
    check(why_cnt[WHY_NOT_OWNER] > 0,    "cross-enclave fault happened");
    check(why_cnt[WHY_BLOCKED] > 0,      "blocked-page fault happened");
    check(why_cnt[WHY_OUTSIDE_XD] > 0,   "XD insertion happened");
    check(why_cnt[WHY_ELRANGE_NONEPC] > 0, "ELRANGE-not-EPC fault happened");
    check(why_cnt[WHY_EPC_OK] > 0,       "EPC insertion happened");
    check(n_hits > 0,                    "TLB hits happened");
    check(n_flush == 10,                  $sformatf("TLB flushes %0d", n_flush));
    check(n_host_stall > 0,              "host EPCM write stalled behind ESACCEPT");
    check(n_walk_fault > 0,              "walk fault happened");
    $display("abort_bi=%0d abort_untrusted=%0d not_owner=%0d blocked=%0d xd=%0d epc_ok=%0d hits=%0d flushes=%0d host_stalls=%0d zero_lines=%0d",
             why_cnt[WHY_BI_OUTSIDE], why_cnt[WHY_OUT_PRM], why_cnt[WHY_NOT_OWNER], why_cnt[WHY_BLOCKED],
             why_cnt[WHY_OUTSIDE_XD], why_cnt[WHY_EPC_OK], n_hits, n_flush, n_host_stall, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
