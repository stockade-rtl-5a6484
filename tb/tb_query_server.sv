// tb_query_server: a multi-module secure query service run on the access control, at its
// default sizes.
//
// Five enclaves make up the service: a monitor enclave (an ordinary enclave, the only one that
// may touch untrusted memory) and four bi-enclave modules: an SSL server, a SQLite database, a
// protected file system and a LibSVM inference engine. Every module has a channel to the
// monitor, and the modules that talk to each other have channels of their own (SSL-SQLite,
// SSL-LibSVM, SQLite-FS): 7 channels of 4 shared pages each, set up with ESADD by one party and
// ESACCEPT by the other. Requests then travel hop by hop. At each hop the core switches to the
// next enclave (AEX out, EENTER or ERESUME in), which reads its input channel page, works on
// its 80 private pages (more than the TLB holds, so entries are evicted), and writes its
// output channel page. Now and then an enclave probes a channel it is not party to, or memory
// outside. Every access result is compared with a reference model of who may touch which page.
// The module list follows the evaluated service; page counts and the request mix are this
// testbench's own.
module tb_query_server;
  import stockade_pkg::*;

  localparam ppn_t        EPC_BASE = ppn_t'('h80000);
  localparam int unsigned EPC_N    = 23936;
  localparam int unsigned IDX_W    = $clog2(EPC_N);
  localparam int unsigned WALK_LAT = 3;
  localparam int          NENC     = 5;     // 0 monitor, 1 SSL, 2 SQLite, 3 FS, 4 LibSVM
  localparam int          NPRIV    = 80;    // private pages per enclave
  localparam int          NCH      = 7;
  localparam int          CHP      = 4;     // pages per channel
  localparam int          NREQ     = 40;

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

  // ---------------- memory path: accepts zero writes 3 cycles in 4 ----------------
  int n_zero = 0, zc = 0;
  always @(negedge clk) begin zc++; zero_ready <= (zc % 4) != 0; end
  always @(posedge clk) if (zero_valid && zero_ready) n_zero++;

  // ---------------- enclaves, pages, channels ----------------
  function automatic eid_t eid(int k);  return EPC_BASE + ppn_t'(k + 1); endfunction
  function automatic vpn_t elr(int k);  return vpn_t'('h100000 + k * 'h1000); endfunction
  function automatic int   priv_idx(int k, int i); return 1000 + k * 200 + i; endfunction
  localparam vpn_t OUT = vpn_t'('h900000);   // untrusted buffers (client data, disk)

  int ch_a [NCH] = '{0, 0, 0, 0, 1, 1, 2};   // offering party (owner)
  int ch_b [NCH] = '{1, 2, 3, 4, 2, 4, 3};   // accepting party (co-owner)
  function automatic int   ch_idx(int c, int j); return 5000 + c * CHP + j; endfunction
  function automatic vpn_t ch_vpn(int c, int j); return elr(ch_a[c]) + vpn_t'(128 + c * CHP + j); endfunction
  function automatic int   channel(int x, int y);
    for (int c = 0; c < NCH; c++)
      if ((ch_a[c] == x && ch_b[c] == y) || (ch_a[c] == y && ch_b[c] == x)) return c;
    return -1;
  endfunction

  // reference state: owner / accepted co-owner per EPC index, blocked pages
  int  own [int];
  int  coown [int];
  bit  blk [int];

  // ---------------- counters ----------------
  int n_flush = 0, n_hits = 0, n_miss = 0, n_share = 0, n_switch = 0, n_probe_denied = 0;
  int why_cnt [11];
  always @(posedge clk) if (rst_n) begin
    if (tlb_flush) n_flush++;
    if (chk_valid) why_cnt[int'(chk_why)]++;
  end

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- drivers ----------------
  task automatic host_page(int idx, epcm_entry_t e);
    @(negedge clk);
    host_epcm_wr_en = 1; host_epcm_wr_idx = IDX_W'(idx); host_epcm_wr_entry = e;
    @(posedge clk); while (!host_epcm_wr_ready) @(posedge clk);
    #1 host_epcm_wr_en = 0;
  endtask

  task automatic ins(op_t o, eid_t s, bit bi, ppn_t pg, eid_t tgt, err_t exp, string what);
    @(negedge clk);
    while (!ins_ready) @(negedge clk);
    ins_valid = 1; ins_op = o; ins_secs = s; ins_bi = bi; ins_page = pg; ins_target = tgt;
    @(posedge clk); #1 ins_valid = 0;
    while (!ins_done) begin @(posedge clk); #1; end
    check(ins_err == exp, $sformatf("%s: %s returned %s, expected %s", what, o.name(), ins_err.name(), exp.name()));
  endtask

  typedef enum { OK, ABORT, FAULT, XDF } res_t;
  int cur = -1;            // running enclave, -1 untrusted
  bit entered [NENC];

  // who may do what, from the reference state
  function automatic res_t expect_res(vpn_t v, acc_t a);
    ppn_t p;
    int   idx;
    if (!pt.exists(v)) return FAULT;
    p = pt[v];
    if (p < EPC_BASE) begin                      // untrusted DRAM
      if (cur < 0) return OK;
      if (cur != 0) return ABORT;                // bi-enclave
      return (a == ACC_EXEC) ? XDF : OK;         // monitor: ordinary enclave
    end
    if (cur < 0) return ABORT;
    idx = int'(p - EPC_BASE);
    if (blk.exists(idx) && blk[idx]) return FAULT;
    if (own[idx] == cur || (coown.exists(idx) && coown[idx] == cur)) return OK;
    return FAULT;
  endfunction

  task automatic access(vpn_t v, acc_t a, string what);
    int lat = 1;
    res_t got, exp;
    exp = expect_res(v, a);
    @(negedge clk);
    while (!acc_ready) @(negedge clk);
    acc_valid = 1; acc_va = {v, 12'h040}; acc_type = a;
    @(posedge clk); #1 acc_valid = 0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    if (lat == 1) n_hits++; else n_miss++;
    if (resp_fault && resp_xd) got = XDF;
    else if (resp_fault)       got = FAULT;
    else if (resp_abort)       got = ABORT;
    else                       got = OK;
    check(got == exp, $sformatf("%s: enclave %0d access %h %s gave %s, expected %s", what, cur, v, a.name(), got.name(), exp.name()));
    if (got == OK)    check(resp_pa == {pt[v], 12'h040}, $sformatf("%s: PA %h", what, resp_pa));
    if (got == ABORT) check(resp_pa == {ppn_t'('1), 12'h040}, $sformatf("%s: abort PA %h", what, resp_pa));
    check(lat == 1 || lat == (pt.exists(v) ? WALK_LAT + 4 : WALK_LAT + 2), $sformatf("%s: latency %0d", what, lat));
  endtask

  task automatic switch_to(int k);
    if (cur >= 0) ins(OP_AEX, '0, 0, '0, '0, ERR_NONE, "AEX");
    ins(entered[k] ? OP_ERESUME : OP_EENTER, eid(k), 0, '0, '0, ERR_NONE, "enter");
    entered[k] = 1;
    cur = k;
    n_switch++;
    check(enclave_mode && cur_eid == eid(k) && bi_enclave == (k != 0), "context after switch");
  endtask

  // one hop of a request: read the input channel, work privately, write the output channel
  task automatic hop(int k, int from, int to, int req);
    int c;
    switch_to(k);
    if (from >= 0) begin
      c = channel(k, from);
      access(ch_vpn(c, req % CHP), ACC_READ, "read input channel");
    end else
      access(OUT + vpn_t'(req % 8), ACC_READ, "monitor reads client/disk buffer");
    for (int i = 0; i < 12; i++)
      access(elr(k) + vpn_t'($urandom_range(0, NPRIV - 1)), acc_t'($urandom_range(0, 2)), "private work");
    if (to >= 0) begin
      c = channel(k, to);
      access(ch_vpn(c, req % CHP), ACC_WRITE, "write output channel");
    end else
      access(OUT + vpn_t'(8 + req % 8), ACC_WRITE, "monitor writes reply buffer");
    if ($urandom_range(0, 2) == 0) begin        // probe where this enclave does not belong
      int pc = $urandom_range(0, NCH - 1);
      if (ch_a[pc] != k && ch_b[pc] != k) begin
        access(ch_vpn(pc, $urandom_range(0, CHP - 1)), ACC_READ, "probe foreign channel");
        n_probe_denied++;
      end else
        access(OUT + vpn_t'($urandom_range(0, 15)), acc_t'($urandom_range(0, 2)), "probe outside");
    end
  endtask

  initial begin
    foreach (why_cnt[i]) why_cnt[i] = 0;
    ins_valid = 0; ins_op = OP_EINIT; ins_secs = '0; ins_bi = 0; ins_page = '0; ins_target = '0;
    acc_valid = 0; acc_va = '0; acc_type = ACC_READ;
    walk_resp_valid = 0; walk_resp_fault = 0; walk_resp_ppn = '0;
    host_epcm_wr_en = 0; host_epcm_wr_idx = '0; host_epcm_wr_entry = '0;
    host_secs_create_en = 0; host_secs_create_idx = '0; host_secs_elrange_base = '0; host_secs_elrange_pages = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // build the five enclaves
    for (int k = 0; k < NENC; k++) begin
      epcm_entry_t e;
      e = '0;
      @(negedge clk);
      host_secs_create_en = 1; host_secs_create_idx = IDX_W'(k + 1);
      host_secs_elrange_base = elr(k); host_secs_elrange_pages = vpn_t'(256);
      @(posedge clk); #1 host_secs_create_en = 0;
      e.valid = 1; e.pt = PT_SECS; e.owner = eid(k);
      host_page(k + 1, e);
      for (int i = 0; i < NPRIV; i++) begin
        e = '0; e.valid = 1; e.pt = PT_REG; e.owner = eid(k); e.vpn = elr(k) + vpn_t'(i);
        host_page(priv_idx(k, i), e);
        pt[elr(k) + vpn_t'(i)] = EPC_BASE + ppn_t'(priv_idx(k, i));
        own[priv_idx(k, i)] = k;
      end
      ins(OP_EINIT, eid(k), k != 0, '0, '0, ERR_NONE, "EINIT");
    end
    for (int c = 0; c < NCH; c++)
      for (int j = 0; j < CHP; j++) begin
        epcm_entry_t e;
        e = '0;
        e.valid = 1; e.pt = PT_REG; e.owner = eid(ch_a[c]); e.vpn = ch_vpn(c, j);
        host_page(ch_idx(c, j), e);
        pt[ch_vpn(c, j)] = EPC_BASE + ppn_t'(ch_idx(c, j));
        own[ch_idx(c, j)] = ch_a[c];
      end
    for (int i = 0; i < 16; i++) pt[OUT + vpn_t'(i)] = ppn_t'('h4000 + i);

    // set up the channels: each owner offers, then each co-owner accepts
    for (int k = 0; k < NENC; k++) begin
      bit any;
      any = 0;
      for (int c = 0; c < NCH; c++) if (ch_a[c] == k) any = 1;
      if (!any) continue;
      switch_to(k);
      for (int c = 0; c < NCH; c++) if (ch_a[c] == k)
        for (int j = 0; j < CHP; j++) begin
          int z0;
          z0 = n_zero;
          access(ch_vpn(c, j), ACC_WRITE, "owner writes the page before offering");
          ins(OP_ESADD, '0, 0, EPC_BASE + ppn_t'(ch_idx(c, j)), eid(ch_b[c]), ERR_NONE, "ESADD");
          blk[ch_idx(c, j)] = 1;
          check(n_zero - z0 == LINES_PER_PAGE, $sformatf("ESADD zeroed %0d lines", n_zero - z0));
          access(ch_vpn(c, j), ACC_READ, "owner on the offered page");
        end
    end
    for (int k = 0; k < NENC; k++) begin
      bit any;
      any = 0;
      for (int c = 0; c < NCH; c++) if (ch_b[c] == k) any = 1;
      if (!any) continue;
      switch_to(k);
      for (int c = 0; c < NCH; c++) if (ch_b[c] == k)
        for (int j = 0; j < CHP; j++) begin
          access(ch_vpn(c, j), ACC_READ, "co-owner before accepting");
          ins(OP_ESACCEPT, '0, 0, EPC_BASE + ppn_t'(ch_idx(c, j)), '0, ERR_NONE, "ESACCEPT");
          blk[ch_idx(c, j)] = 0; coown[ch_idx(c, j)] = k;
          n_share++;
          access(ch_vpn(c, j), ACC_WRITE, "co-owner after accepting");
        end
    end

    // requests: database queries (MON->SSL->SQL->FS->MON->FS->SQL->SSL->MON) and
    // predictions (MON->SSL->SVM->SSL->MON)
    for (int r = 0; r < NREQ; r++) begin
      if (r % 2 == 0) begin
        hop(0, -1, 1, r); hop(1, 0, 2, r); hop(2, 1, 3, r); hop(3, 2, 0, r);
        hop(0, 3, -1, r); hop(0, -1, 3, r); hop(3, 0, 2, r); hop(2, 3, 1, r);
        hop(1, 2, 0, r); hop(0, 1, -1, r);
      end else begin
        hop(0, -1, 1, r); hop(1, 0, 4, r); hop(4, 1, 1, r); hop(1, 4, 0, r); hop(0, 1, -1, r);
      end
    end
    // a bi-enclave module tries to leave
    switch_to(2);
    ins(OP_EEXIT, '0, 0, '0, '0, ERR_EEXIT_BI, "SQLite tries EEXIT");
    ins(OP_AEX, '0, 0, '0, '0, ERR_NONE, "final AEX");
    cur = -1;
    access(elr(2), ACC_READ, "untrusted reads SQLite");
    access(ch_vpn(4, 0), ACC_READ, "untrusted reads a channel");
    repeat (2) @(posedge clk);

    check(n_share == NCH * CHP,             "all channel pages shared");
    check(n_zero == NCH * CHP * LINES_PER_PAGE, "all shared pages zeroed");
    check(why_cnt[WHY_BI_OUTSIDE] > 0,      "bi-enclave confinement happened");
    check(why_cnt[WHY_NOT_OWNER] > 0,       "foreign-page faults happened");
    check(why_cnt[WHY_BLOCKED] > 0,         "blocked-page faults happened");
    check(why_cnt[WHY_OUTSIDE_XD] > 0,      "monitor's outside accesses got XD");
    check(why_cnt[WHY_OUT_PRM] > 0,         "untrusted access to PRM happened");
    check(n_probe_denied > 0,               "foreign channel probes happened");
    check(n_hits > 0 && n_miss > 0,         "TLB hits and misses happened");
    check(n_flush > n_switch,               "TLB flushed on switches and sharing");
    $display("requests=%0d switches=%0d shares=%0d zero_lines=%0d hits=%0d misses=%0d flushes=%0d probes_denied=%0d abort_bi=%0d not_owner=%0d blocked=%0d xd=%0d",
             NREQ, n_switch, n_share, n_zero, n_hits, n_miss, n_flush, n_probe_denied,
             why_cnt[WHY_BI_OUTSIDE], why_cnt[WHY_NOT_OWNER], why_cnt[WHY_BLOCKED], why_cnt[WHY_OUTSIDE_XD]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
