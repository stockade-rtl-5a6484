// tb_mode_ctrl: self-checking test of the enclave mode controller (EINIT, EENTER, ERESUME,
// EEXIT, AEX) with Stockade's bi-enclave flag and EEXIT abort.
//
// The SECS store is modelled in the testbench (one-cycle read, EINIT writes applied to the
// model). A directed sequence covers each instruction's success and error cases; after each
// one the error code, the context registers, the TLB flush pulse and the completion latency
// (3 cycles for instructions that read the SECS, 2 for EEXIT and AEX) are checked.
module tb_mode_ctrl;
  import stockade_pkg::*;

  localparam ppn_t        EPC_BASE = ppn_t'('h80000);
  localparam int unsigned N        = 23936;
  localparam int unsigned IDX_W    = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             op_valid, op_ready, op_bi, done;
  op_t              op;
  eid_t             op_secs;
  err_t             err;
  logic             secs_rd_en, secs_rd_exists, secs_init_en, secs_init_bi;
  logic [IDX_W-1:0] secs_rd_idx, secs_init_idx;
  secs_t            secs_rd;
  logic             enclave_mode, bi_enclave, tlb_flush;
  eid_t             cur_eid;
  vpn_t             elrange_base, elrange_pages;

  mode_ctrl #(.EPC_BASE_PPN (EPC_BASE), .EPC_PAGES (N)) dut (.*);

  // SECS store model
  secs_t sm [int];
  always_ff @(posedge clk) begin
    if (secs_rd_en) begin
      secs_rd_exists <= sm.exists(int'(secs_rd_idx));
      secs_rd        <= sm.exists(int'(secs_rd_idx)) ? sm[int'(secs_rd_idx)] : '0;
    end
    if (secs_init_en) begin
      sm[int'(secs_init_idx)].initialized <= 1'b1;
      sm[int'(secs_init_idx)].bi_enclave  <= secs_init_bi;
    end
  end

  int checks = 0, failures = 0;
  int n_eexit_abort = 0, n_flush = 0;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one instruction; check error, latency and whether a flush pulse came with done.
  task automatic run(op_t o, eid_t s, bit bi, err_t exp_err, int exp_lat, bit exp_flush);
    int lat = 0;
    bit flushed = 0;
    @(negedge clk);
    check(op_ready, "op_ready before issue");
    op_valid = 1; op = o; op_secs = s; op_bi = bi;
    @(posedge clk); #1 op_valid = 0;
    while (!done) begin
      if (tlb_flush) flushed = 1;
      @(posedge clk); #1; lat++;
    end
    if (tlb_flush) flushed = 1;
    check(err == exp_err, $sformatf("%s: err %s, expected %s", o.name(), err.name(), exp_err.name()));
    check(lat + 1 == exp_lat, $sformatf("%s: latency %0d, expected %0d", o.name(), lat + 1, exp_lat));
    check(flushed == exp_flush, $sformatf("%s: flush %0d, expected %0d", o.name(), flushed, exp_flush));
    if (err == ERR_EEXIT_BI) n_eexit_abort++;
    if (flushed) n_flush++;
  endtask

  localparam eid_t E1 = EPC_BASE + 1, E2 = EPC_BASE + 2;

  initial begin
    op_valid = 0; op = OP_EINIT; op_secs = '0; op_bi = 0;
    secs_rd_exists = 0; secs_rd = '0;
    sm[1] = '{initialized: 0, bi_enclave: 0, elrange_base: vpn_t'('h10000), elrange_pages: vpn_t'(16)};
    sm[2] = '{initialized: 0, bi_enclave: 0, elrange_base: vpn_t'('h30000), elrange_pages: vpn_t'(64)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(!enclave_mode, "reset: not in enclave mode");
    run(OP_EENTER,  E1, 0, ERR_NOT_INIT,     3, 0);
    run(OP_EINIT,   E1, 1, ERR_NONE,         3, 0);
    check(sm[1].initialized && sm[1].bi_enclave, "EINIT stored the bi-enclave flag");
    run(OP_EINIT,   E1, 0, ERR_ALREADY_INIT, 3, 0);
    check(sm[1].bi_enclave, "second EINIT did not clear the flag");
    run(OP_EINIT,   EPC_BASE + 5, 0, ERR_BAD_SECS, 3, 0);
    run(OP_EINIT,   EPC_BASE - 1, 0, ERR_BAD_SECS, 3, 0);
    run(OP_EINIT,   E2, 0, ERR_NONE,         3, 0);
    check(sm[2].initialized && !sm[2].bi_enclave, "EINIT of an ordinary enclave");
    run(OP_EEXIT,   '0, 0, ERR_NOT_ENCLAVE,  2, 0);
    run(OP_AEX,     '0, 0, ERR_NOT_ENCLAVE,  2, 0);
    run(OP_EENTER,  E1, 0, ERR_NONE,         3, 1);
    check(enclave_mode && bi_enclave && cur_eid == E1, "EENTER loaded the bi-enclave context");
    check(elrange_base == vpn_t'('h10000) && elrange_pages == vpn_t'(16), "EENTER loaded ELRANGE");
    run(OP_EENTER,  E2, 0, ERR_IN_ENCLAVE,   3, 0);
    run(OP_EINIT,   E2, 0, ERR_IN_ENCLAVE,   3, 0);
    run(OP_EEXIT,   '0, 0, ERR_EEXIT_BI,     2, 0);
    check(enclave_mode && cur_eid == E1, "bi-enclave stays in enclave mode after EEXIT");
    run(OP_AEX,     '0, 0, ERR_NONE,         2, 1);
    check(!enclave_mode, "AEX leaves a bi-enclave");
    run(OP_ERESUME, E1, 0, ERR_NONE,         3, 1);
    check(enclave_mode && bi_enclave, "ERESUME back into the bi-enclave");
    run(OP_AEX,     '0, 0, ERR_NONE,         2, 1);
    run(OP_EENTER,  E2, 0, ERR_NONE,         3, 1);
    check(enclave_mode && !bi_enclave && cur_eid == E2 && elrange_pages == vpn_t'(64), "EENTER E2");
    run(OP_EEXIT,   '0, 0, ERR_NONE,         2, 1);
    check(!enclave_mode, "EEXIT of an ordinary enclave");
    // ESADD is not this controller's: it answers at once with ERR_BAD_OP.
    run(OP_ESADD,   '0, 0, ERR_BAD_OP,       1, 0);
    check(n_eexit_abort == 1, "EEXIT abort seen once");
    $display("eexit_aborts=%0d flushes=%0d", n_eexit_abort, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
