// tb_tlb: self-checking test of the TLB.
//
// Fills random translations with random abort/XD attributes, looks up random pages and
// compares hit, PPN and attributes with a reference model that mirrors the round-robin
// replacement and same-page overwrite. Also checks that a flush empties the TLB, that a flush
// beats a fill in the same cycle, and that capacity is exactly ENTRIES.
module tb_tlb;
  import stockade_pkg::*;

  localparam int unsigned E = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  vpn_t lk_vpn, fill_vpn;
  ppn_t lk_ppn, fill_ppn;
  logic lk_hit, lk_xd, lk_abort, fill_en, fill_xd, fill_abort, flush;

  tlb #(.ENTRIES (E)) dut (.*);

  typedef struct { bit v; vpn_t vpn; ppn_t ppn; bit xd; bit ab; } ent_t;
  ent_t m [E];
  int   rr = 0;
  int checks = 0, failures = 0;
  int n_flush = 0, n_abort_hits = 0;

  task automatic model_fill(vpn_t v, ppn_t p, bit xd, bit ab);
    int slot = -1;
    for (int i = 0; i < E; i++) if (m[i].v && m[i].vpn == v) slot = i;
    if (slot < 0) begin slot = rr; rr = (rr + 1) % E; end
    m[slot] = '{v: 1, vpn: v, ppn: p, xd: xd, ab: ab};
  endtask

  task automatic lookup_check(vpn_t v);
    bit h = 0; ppn_t p = '0; bit x = 0, a = 0;
    lk_vpn = v;
    #1;
    for (int i = 0; i < E; i++) if (m[i].v && m[i].vpn == v) begin h = 1; p = m[i].ppn; x = m[i].xd; a = m[i].ab; end
    checks++;
    if (lk_hit !== h || (h && (lk_ppn !== p || lk_xd !== x || lk_abort !== a))) begin
      failures++;
      if (failures < 10) $display("lookup %h: hit %0d/%0d ppn %h/%h", v, lk_hit, h, lk_ppn, p);
    end
    if (h && a) n_abort_hits++;
  endtask

  initial begin
    foreach (m[i]) m[i].v = 0;
    fill_en = 0; flush = 0; fill_vpn = '0; fill_ppn = '0; fill_xd = 0; fill_abort = 0; lk_vpn = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      lookup_check(vpn_t'($urandom_range(0, 99)));
      fill_en    = $urandom_range(0, 1);
      fill_vpn   = vpn_t'($urandom_range(0, 99));
      fill_ppn   = ppn_t'({$urandom, $urandom});
      fill_xd    = $urandom_range(0, 1);
      fill_abort = $urandom_range(0, 3) == 0;
      flush      = $urandom_range(0, 199) == 0;
      if (flush) begin
        foreach (m[i]) m[i].v = 0;
        n_flush++;
      end else if (fill_en) model_fill(fill_vpn, fill_ppn, fill_xd, fill_abort);
      @(posedge clk);
      #1 fill_en = 0; flush = 0;
    end
    // capacity: E distinct pages all hit, the next one evicts exactly one
    @(negedge clk); flush = 1; foreach (m[i]) m[i].v = 0;
    @(negedge clk); flush = 0;
    for (int i = 0; i < E + 1; i++) begin
      fill_en = 1; fill_vpn = vpn_t'(1000 + i); fill_ppn = ppn_t'(i); fill_xd = 0; fill_abort = 0;
      model_fill(fill_vpn, fill_ppn, 0, 0);
      @(negedge clk);
    end
    fill_en = 0;
    begin
      int hits = 0;
      for (int i = 0; i < E + 1; i++) begin
        lk_vpn = vpn_t'(1000 + i); #1; if (lk_hit) hits++;
      end
      checks++;
      if (hits != E) begin failures++; $display("capacity: %0d hits, expected %0d", hits, E); end
    end
    checks++;
    if (n_flush == 0 || n_abort_hits == 0) begin failures++; $display("flush or abort hit never seen"); end
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
