// tb_access_validator: self-checking test of the TLB-miss access check.
//
// Drives random contexts, translations and EPCM entries, biased so that every branch of the
// check is taken, and compares verdict and reason with a reference written as a table of
// conditions in priority order. Counts each reason seen and fails if any reason never
// occurred. The block is combinational; a clock only paces the stimulus.
module tb_access_validator;
  import stockade_pkg::*;

  localparam ppn_t        PRM_BASE = ppn_t'('h80000);
  localparam int unsigned PRM_N    = 32768;
  localparam ppn_t        EPC_BASE = ppn_t'('h80000);
  localparam int unsigned EPC_N    = 23936;

  logic        enclave_mode, bi_enclave;
  eid_t        cur_eid;
  vpn_t        elr_base, elr_pages, vpn;
  ppn_t        ppn;
  epcm_entry_t ent;
  logic        in_prm, in_epc;
  verdict_t    verdict;
  why_t        why;

  int checks = 0, failures = 0;
  int why_seen [11];
  logic clk = 0;
  always #5 clk = ~clk;

  access_validator #(
    .PRM_BASE_PPN (PRM_BASE), .PRM_PAGES (PRM_N), .EPC_BASE_PPN (EPC_BASE), .EPC_PAGES (EPC_N)
  ) dut (
    .enclave_mode (enclave_mode), .bi_enclave (bi_enclave), .cur_eid (cur_eid),
    .elrange_base (elr_base), .elrange_pages (elr_pages), .vpn (vpn), .ppn (ppn),
    .epcm (ent), .in_prm (in_prm), .in_epc (in_epc), .verdict (verdict), .why (why)
  );

  // Reference: walk the decisions with plain integer arithmetic on the page numbers.
  function automatic void ref_check(output verdict_t v, output why_t w);
    longint unsigned p, vb, vs, vv;
    bit prm, epc, elr, own;
    p   = longint'(ppn);
    vv  = longint'(vpn); vb = longint'(elr_base); vs = longint'(elr_pages);
    prm = p >= longint'(PRM_BASE) && p < longint'(PRM_BASE) + PRM_N;
    epc = p >= longint'(EPC_BASE) && p < longint'(EPC_BASE) + EPC_N;
    elr = vv >= vb && vv < vb + vs;
    own = (ent.owner == cur_eid) || (ent.coowner_valid && ent.coowner == cur_eid);
    if (!enclave_mode)          begin v = prm ? VD_ABORT : VD_INSERT; w = prm ? WHY_OUT_PRM : WHY_OUT_OK; end
    else if (prm && !epc)       begin v = VD_PAGEFAULT; w = WHY_NOT_EPC; end
    else if (prm && !ent.valid) begin v = VD_PAGEFAULT; w = WHY_EPCM_INVALID; end
    else if (prm && ent.blocked)begin v = VD_PAGEFAULT; w = WHY_BLOCKED; end
    else if (prm && !own)       begin v = VD_PAGEFAULT; w = WHY_NOT_OWNER; end
    else if (prm && ent.vpn != vpn) begin v = VD_PAGEFAULT; w = WHY_VA_MISMATCH; end
    else if (prm)               begin v = VD_INSERT; w = WHY_EPC_OK; end
    else if (elr)               begin v = VD_PAGEFAULT; w = WHY_ELRANGE_NONEPC; end
    else if (bi_enclave)        begin v = VD_ABORT; w = WHY_BI_OUTSIDE; end
    else                        begin v = VD_INSERT_XD; w = WHY_OUTSIDE_XD; end
  endfunction

  function automatic ppn_t pick_ppn();
    int unsigned r = $urandom_range(0, 3);
    case (r)
      0: return ppn_t'($urandom_range(0, 'h7ffff));                               // DRAM below PRM
      1: return PRM_BASE + ppn_t'($urandom_range(EPC_N, PRM_N - 1));               // PRM, not EPC
      2: return EPC_BASE + ppn_t'($urandom_range(0, EPC_N - 1));                  // EPC
      default: return ppn_t'($urandom_range(0, 1) ? PRM_BASE + PRM_N : EPC_BASE - 1); // edges
    endcase
  endfunction

  verdict_t rv;
  why_t     rw;

  initial begin
    foreach (why_seen[i]) why_seen[i] = 0;
    repeat (20000) begin
      @(posedge clk);
      enclave_mode = ($urandom_range(0, 4) != 0);
      bi_enclave   = $urandom_range(0, 1);
      cur_eid      = EPC_BASE + ppn_t'($urandom_range(0, 3));
      elr_base     = vpn_t'(36'h10000);
      elr_pages    = vpn_t'(36'h100);
      vpn          = $urandom_range(0, 1) ? elr_base + vpn_t'($urandom_range(0, 'h1ff))
                                          : vpn_t'($urandom_range(0, 'hfffff));
      ppn          = pick_ppn();
      ent               = '0;
      ent.valid         = ($urandom_range(0, 7) != 0);
      ent.blocked       = ($urandom_range(0, 7) == 0);
      ent.pt            = PT_REG;
      ent.owner         = EPC_BASE + ppn_t'($urandom_range(0, 3));
      ent.coowner_valid = $urandom_range(0, 1);
      ent.coowner       = EPC_BASE + ppn_t'($urandom_range(0, 3));
      ent.vpn           = $urandom_range(0, 1) ? vpn : vpn + 1;
      #1;
      ref_check(rv, rw);
      checks++;
      if (verdict !== rv || why !== rw) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH mode=%0d bi=%0d ppn=%h vpn=%h got %s/%s exp %s/%s", enclave_mode,
                   bi_enclave, ppn, vpn, verdict.name(), why.name(), rv.name(), rw.name());
      end
      if (int'(rw) < 11) why_seen[int'(rw)]++;
    end
    // Every decision of the flowchart must have been reached.
    foreach (why_seen[i]) begin
      checks++;
      if (why_seen[i] == 0) begin
        failures++;
        $display("reason %0d never exercised", i);
      end
    end
    $display("bi-enclave outside accesses turned into abort pages: %0d", why_seen[WHY_BI_OUTSIDE]);
    $display("co-owner/owner EPC inserts: %0d", why_seen[WHY_EPC_OK]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
