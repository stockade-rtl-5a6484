// tb_secs_store: self-checking test of the per-enclave SECS record store.
//
// Checks that nothing exists after reset, that ECREATE records ELRANGE and clears the flags,
// that EINIT sets initialized and the bi-enclave flag given with it, that create wins over
// init on the same record in the same cycle, and that reads answer one cycle after rd_en.
// Random traffic is compared with a reference model.
module tb_secs_store;
  import stockade_pkg::*;

  localparam int unsigned N     = 23936;
  localparam int unsigned IDX_W = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             create_en, init_en, init_bi, rd_en, rd_exists;
  logic [IDX_W-1:0] create_idx, init_idx, rd_idx;
  vpn_t             create_base, create_pages;
  secs_t            rd_secs;

  secs_store #(.EPC_PAGES (N)) dut (.*);

  typedef struct { bit ex; bit in; bit bi; vpn_t b; vpn_t p; } rec_t;
  rec_t model [int];
  int checks = 0, failures = 0;
  int n_bi_init = 0;

  rec_t exp_r;
  logic chk;

  initial begin
    create_en = 0; init_en = 0; init_bi = 0; rd_en = 0;
    create_idx = '0; init_idx = '0; rd_idx = '0; create_base = '0; create_pages = '0;
    chk = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 30000; k++) begin
      @(negedge clk);
      if (chk) begin
        checks++;
        if (rd_exists !== exp_r.ex ||
            (exp_r.ex && (rd_secs.initialized !== exp_r.in || rd_secs.bi_enclave !== exp_r.bi ||
                          rd_secs.elrange_base !== exp_r.b || rd_secs.elrange_pages !== exp_r.p))) begin
          failures++;
          if (failures < 10) $display("mismatch at %0d: ex=%0d/%0d in=%0d/%0d bi=%0d/%0d", k,
                                      rd_exists, exp_r.ex, rd_secs.initialized, exp_r.in,
                                      rd_secs.bi_enclave, exp_r.bi);
        end
      end
      create_en    = ($urandom_range(0, 7) == 0);
      create_idx   = IDX_W'($urandom_range(0, 31));
      create_base  = vpn_t'({$urandom, $urandom});
      create_pages = vpn_t'($urandom);
      init_en      = ($urandom_range(0, 3) == 0);
      init_idx     = $urandom_range(0, 7) == 0 ? create_idx : IDX_W'($urandom_range(0, 31));
      init_bi      = $urandom_range(0, 1);
      rd_en        = $urandom_range(0, 1);
      rd_idx       = $urandom_range(0, 1) ? init_idx : IDX_W'($urandom_range(0, 31));
      if (k > 0 && $urandom_range(0, 50) == 0) rd_idx = IDX_W'($urandom_range(32, N - 1));
      chk = rd_en;
      if (rd_en) begin
        if (model.exists(int'(rd_idx))) exp_r = model[int'(rd_idx)];
        else exp_r = '{ex: 0, in: 0, bi: 0, b: '0, p: '0};
      end
      if (init_en) begin
        rec_t r;
        if (model.exists(int'(init_idx))) r = model[int'(init_idx)];
        else r = '{ex: 0, in: 0, bi: 0, b: '0, p: '0};
        r.in = 1; r.bi = init_bi;
        model[int'(init_idx)] = r;
        if (init_bi) n_bi_init++;
      end
      if (create_en) model[int'(create_idx)] = '{ex: 1, in: 0, bi: 0, b: create_base, p: create_pages};
    end
    @(negedge clk);
    create_en = 0; init_en = 0; rd_en = 0;
    checks++;
    if (n_bi_init == 0) begin failures++; $display("no bi-enclave EINIT exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
