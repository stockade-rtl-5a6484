// tb_epcm: self-checking test of the EPCM table.
//
// After reset every entry must read as invalid. Then random writes and reads on both read
// ports (including reads of the index being written in the same cycle, which must return the
// old entry) are compared against a reference model kept in an associative array. Read data
// is checked exactly one cycle after rd_en, which checks the read latency.
module tb_epcm;
  import stockade_pkg::*;

  localparam int unsigned N     = 23936;
  localparam int unsigned IDX_W = $clog2(N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             rda_en, rdb_en, wr_en;
  logic [IDX_W-1:0] rda_idx, rdb_idx, wr_idx;
  epcm_entry_t      rda_entry, rdb_entry, wr_entry;

  epcm #(.EPC_PAGES (N)) dut (.*);

  epcm_entry_t model [int];
  int checks = 0, failures = 0;

  function automatic epcm_entry_t ref_rd(int i);
    epcm_entry_t e;
    if (model.exists(i)) return model[i];
    e = '0;
    return e;
  endfunction

  function automatic epcm_entry_t rand_entry();
    epcm_entry_t e;
    e.valid         = $urandom_range(0, 3) != 0;
    e.blocked       = $urandom_range(0, 1);
    e.pt            = page_type_t'($urandom_range(0, 2));
    e.owner         = {$urandom, $urandom};
    e.vpn           = {$urandom, $urandom};
    e.share_pending = $urandom_range(0, 1);
    e.coowner_valid = $urandom_range(0, 1);
    e.coowner       = {$urandom, $urandom};
    return e;
  endfunction

  // Compare only the fields that matter when the entry is invalid: valid itself.
  function automatic bit same(epcm_entry_t a, epcm_entry_t b);
    if (!b.valid) return !a.valid;
    return a == b;
  endfunction

  epcm_entry_t exp_a, exp_b;
  logic        chk_a, chk_b;
  int          hot;

  initial begin
    rda_en = 0; rdb_en = 0; wr_en = 0; rda_idx = '0; rdb_idx = '0; wr_idx = '0; wr_entry = '0;
    chk_a = 0; chk_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // After reset nothing is valid (array contents are random here).
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      rda_en = 1; rda_idx = IDX_W'($urandom_range(0, N - 1));
      @(negedge clk);
      rda_en = 0;
      checks++;
      if (rda_entry.valid) begin failures++; $display("entry valid after reset"); end
    end
    // Random traffic on a small set of hot indices plus the whole range.
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      // check what was read at the last edge
      if (chk_a) begin checks++; if (!same(rda_entry, exp_a)) begin failures++;
        if (failures < 10) $display("port A mismatch at %0d", k); end end
      if (chk_b) begin checks++; if (!same(rdb_entry, exp_b)) begin failures++;
        if (failures < 10) $display("port B mismatch at %0d", k); end end
      hot     = $urandom_range(0, 15) + (($urandom_range(0, 3) == 0) ? $urandom_range(0, N - 17) : 0);
      wr_en   = $urandom_range(0, 1);
      wr_idx  = IDX_W'(hot);
      wr_entry= rand_entry();
      rda_en  = $urandom_range(0, 1);
      rda_idx = $urandom_range(0, 1) ? wr_idx : IDX_W'($urandom_range(0, 15));
      rdb_en  = $urandom_range(0, 1);
      rdb_idx = IDX_W'($urandom_range(0, 15));
      chk_a   = rda_en; exp_a = ref_rd(int'(rda_idx));
      chk_b   = rdb_en; exp_b = ref_rd(int'(rdb_idx));
      if (wr_en) model[int'(wr_idx)] = wr_entry;
    end
    @(negedge clk);
    rda_en = 0; rdb_en = 0; wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
