// tb_share_ctrl: self-checking test of ESADD and ESACCEPT.
//
// The EPCM and the memory path are modelled in the testbench (one-cycle EPCM read, writes
// applied to the model; zero-line writes recorded, with an always-ready or a random ready).
// A directed sequence checks each error case, a complete share (offer by the owner, accept by
// the co-owner) and the EPCM contents after each step: blocked and pending after ESADD, the
// co-owner committed after ESACCEPT. It checks that ESADD writes zeros to all 64 lines of the
// page in order, that both instructions flush the TLB, and the latencies (69 cycles for ESADD
// with an always-ready memory, 3 for ESACCEPT).
module tb_share_ctrl;
  import stockade_pkg::*;

  localparam ppn_t        EPC_BASE = ppn_t'('h80000);
  localparam int unsigned N        = 23936;
  localparam int unsigned IDX_W    = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             op_valid, op_ready, done, enclave_mode;
  op_t              op;
  ppn_t             op_page;
  eid_t             op_target, cur_eid;
  err_t             err;
  logic             epcm_rd_en, epcm_wr_en, tlb_flush, zero_valid, zero_ready, busy;
  logic [IDX_W-1:0] epcm_rd_idx, epcm_wr_idx;
  epcm_entry_t      epcm_rd_entry, epcm_wr_entry;
  logic [PA_W-1:0]  zero_addr;

  share_ctrl #(.EPC_BASE_PPN (EPC_BASE), .EPC_PAGES (N)) dut (.*);

  epcm_entry_t em [int];
  always @(posedge clk) begin
    if (epcm_rd_en) epcm_rd_entry <= em.exists(int'(epcm_rd_idx)) ? em[int'(epcm_rd_idx)] : '0;
    if (epcm_wr_en) em[int'(epcm_wr_idx)] = epcm_wr_entry;   // after the read: read-old
  end

  // memory path model
  bit               rand_ready = 0;
  logic [PA_W-1:0]  zlog [$];
  always @(negedge clk) zero_ready <= rand_ready ? 1'($urandom_range(0, 1)) : 1'b1;
  always @(posedge clk) if (zero_valid && zero_ready) zlog.push_back(zero_addr);

  int checks = 0, failures = 0;
  int n_share = 0, n_flush = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(op_t o, ppn_t pg, eid_t tgt, err_t exp_err, int exp_lat, bit exp_flush);
    int lat = 0;
    bit flushed = 0;
    @(negedge clk);
    op_valid = 1; op = o; op_page = pg; op_target = tgt;
    @(posedge clk);
    #1 op_valid = 0;
    while (!done) begin
      @(posedge clk);
      if (tlb_flush) flushed = 1;
      #1; lat++;
    end
    check(err == exp_err, $sformatf("%s: err %s, expected %s", o.name(), err.name(), exp_err.name()));
    if (exp_lat > 0)
      check(lat + 1 == exp_lat, $sformatf("%s: latency %0d, expected %0d", o.name(), lat + 1, exp_lat));
    check(flushed == exp_flush, $sformatf("%s: flush %0d, expected %0d", o.name(), flushed, exp_flush));
    if (flushed) n_flush++;
  endtask

  // The flush is combinational with the EPCM write; sample it on the clock edge too.
  always @(posedge clk) if (tlb_flush) check(epcm_wr_en, "flush only with an EPCM update");

  task automatic check_zeroed(ppn_t pg);
    check(zlog.size() == LINES_PER_PAGE, $sformatf("zero writes %0d", zlog.size()));
    for (int i = 0; i < zlog.size(); i++)
      check(zlog[i] == {pg, 12'(i * LINE_BYTES)}, $sformatf("zero write %0d address %h", i, zlog[i]));
    zlog.delete();
  endtask

  function automatic epcm_entry_t mk(bit v, page_type_t t, eid_t own, vpn_t va);
    epcm_entry_t e = '0;
    e.valid = v; e.pt = t; e.owner = own; e.vpn = va;
    return e;
  endfunction

  localparam eid_t E1 = EPC_BASE + 1, E2 = EPC_BASE + 2, E3 = EPC_BASE + 3;
  localparam ppn_t P = EPC_BASE + 100, Q = EPC_BASE + 101, R = EPC_BASE + 102;

  initial begin
    op_valid = 0; op = OP_ESADD; op_page = '0; op_target = '0; enclave_mode = 0; cur_eid = '0;
    epcm_rd_entry = '0; zero_ready = 1;
    em[1]   = mk(1, PT_SECS, E1, '0);
    em[2]   = mk(1, PT_SECS, E2, '0);
    em[3]   = mk(1, PT_SECS, E3, '0);
    em[100] = mk(1, PT_REG, E1, vpn_t'('h10040));
    em[101] = mk(1, PT_REG, E2, vpn_t'('h10041));
    em[102] = mk(1, PT_REG, E1, vpn_t'('h10042));
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(OP_ESADD,    P, E2, ERR_NOT_ENCLAVE, 1, 0);
    enclave_mode = 1; cur_eid = E1;
    run(OP_ESADD,    Q, E2, ERR_NOT_OWNER,   3, 0);
    run(OP_ESADD,    P, E1, ERR_BAD_SECS,    5, 0);
    run(OP_ESADD,    P, Q,  ERR_BAD_SECS,    5, 0);
    run(OP_ESADD,    P, EPC_BASE + N, ERR_BAD_SECS, 1, 0);
    run(OP_ESADD,    EPC_BASE + N, E2, ERR_BAD_PAGE, 1, 0);
    run(OP_ESADD,    E2, E3, ERR_BAD_PAGE,   3, 0);       // a SECS page cannot be shared
    run(OP_ESACCEPT, P, '0, ERR_BAD_PAGE,    3, 0);       // nothing offered yet
    check(zlog.size() == 0, "no zeroing on failed ESADD");
    // owner offers P to E2
    run(OP_ESADD,    P, E2, ERR_NONE,        69, 1);
    check_zeroed(P);
    check(em[100].blocked && em[100].share_pending && !em[100].coowner_valid && em[100].coowner == E2,
          "ESADD left the page blocked and offered to E2");
    check(em[100].owner == E1 && em[100].vpn == vpn_t'('h10040), "ESADD kept owner and VA");
    run(OP_ESADD,    P, E3, ERR_BUSY,        3, 0);
    cur_eid = E3;
    run(OP_ESACCEPT, P, '0, ERR_NOT_COOWNER, 3, 0);
    cur_eid = E2;
    run(OP_ESACCEPT, P, '0, ERR_NONE,        3, 1);
    check(!em[100].blocked && !em[100].share_pending && em[100].coowner_valid && em[100].coowner == E2,
          "ESACCEPT committed co-owner E2");
    n_share++;
    run(OP_ESACCEPT, P, '0, ERR_BAD_PAGE,    3, 0);
    cur_eid = E1;
    run(OP_ESADD,    P, E3, ERR_BUSY,        3, 0);       // one co-owner only
    // second share with a memory path that is not always ready
    rand_ready = 1;
    run(OP_ESADD,    R, E3, ERR_NONE,        0, 1);
    check_zeroed(R);
    cur_eid = E3;
    run(OP_ESACCEPT, R, '0, ERR_NONE,        3, 1);
    check(em[102].coowner_valid && em[102].coowner == E3 && !em[102].blocked, "second share committed");
    n_share++;
    $display("shares=%0d flushes=%0d", n_share, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
