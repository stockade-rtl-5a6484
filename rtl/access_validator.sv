// access_validator: the access check made on every TLB miss (Stockade's extension of the SGX
// address translation flow).
//
// Purely combinational. Given the walked translation (vpn -> ppn), the current execution
// context and the EPCM entry of ppn (meaningful only when ppn lies in the EPC), it returns
// one of four verdicts: insert the translation, insert it with execute-disable (XD), insert
// a translation to the abort page, or raise a page fault. `why` says which decision led there.
//
// Decision order (the paper's flowchart):
//   non-enclave code : PA in PRM -> abort page, else insert.
//   enclave code     : PA in PRM -> PA in EPC? no -> page fault;
//                                   EPCM blocked -> page fault;
//                                   current EID = owner, or (Stockade check 2) = co-owner?
//                                     no -> page fault;
//                                   EPCM VA = translated VA? no -> page fault, yes -> insert.
//                      PA not in PRM -> VA in ELRANGE -> page fault;
//                                   (Stockade check 1) bi-enclave -> abort page;
//                                   otherwise insert with XD set.
// The EPCM valid bit is checked together with "blocked"; the flowchart does not draw it, the
// SGX flow it extends does. The co-owner comparison only counts when the co-owner field has
// been committed by ESACCEPT. PRM and EPC ranges are parameters (in a processor they come from
// range registers set at boot).
module access_validator
  import stockade_pkg::*;
#(
  parameter ppn_t        PRM_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned PRM_PAGES    = 32768,
  parameter ppn_t        EPC_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned EPC_PAGES    = 23936
) (
  input  logic        enclave_mode,   // executing enclave code
  input  logic        bi_enclave,     // current enclave's SECS bi-enclave flag
  input  eid_t        cur_eid,        // current enclave (SECS PPN)
  input  vpn_t        elrange_base,
  input  vpn_t        elrange_pages,
  input  vpn_t        vpn,            // translated virtual page
  input  ppn_t        ppn,            // physical page from the page walk
  input  epcm_entry_t epcm,           // EPCM entry of ppn (used when ppn is in EPC)
  output logic        in_prm,
  output logic        in_epc,
  output verdict_t    verdict,
  output why_t        why
);

  ppn_t prm_off, epc_off;
  vpn_t elr_off;
  logic in_elrange;
  logic eid_owner, eid_coowner;

  always_comb begin
    prm_off     = ppn - PRM_BASE_PPN;
    epc_off     = ppn - EPC_BASE_PPN;
    elr_off     = vpn - elrange_base;
    in_prm      = (ppn >= PRM_BASE_PPN) && (prm_off < ppn_t'(PRM_PAGES));
    in_epc      = (ppn >= EPC_BASE_PPN) && (epc_off < ppn_t'(EPC_PAGES));
    in_elrange  = (vpn >= elrange_base) && (elr_off < elrange_pages);
    eid_owner   = (epcm.owner == cur_eid);
    eid_coowner = epcm.coowner_valid && (epcm.coowner == cur_eid);

    verdict = VD_PAGEFAULT;
    why     = WHY_NOT_EPC;
    if (!enclave_mode) begin
      if (in_prm) begin
        verdict = VD_ABORT;      why = WHY_OUT_PRM;
      end else begin
        verdict = VD_INSERT;     why = WHY_OUT_OK;
      end
    end else if (in_prm) begin
      if (!in_epc) begin
        verdict = VD_PAGEFAULT;  why = WHY_NOT_EPC;
      end else if (!epcm.valid) begin
        verdict = VD_PAGEFAULT;  why = WHY_EPCM_INVALID;
      end else if (epcm.blocked) begin
        verdict = VD_PAGEFAULT;  why = WHY_BLOCKED;
      end else if (!eid_owner && !eid_coowner) begin
        verdict = VD_PAGEFAULT;  why = WHY_NOT_OWNER;
      end else if (epcm.vpn != vpn) begin
        verdict = VD_PAGEFAULT;  why = WHY_VA_MISMATCH;
      end else begin
        verdict = VD_INSERT;     why = WHY_EPC_OK;
      end
    end else if (in_elrange) begin
      verdict = VD_PAGEFAULT;    why = WHY_ELRANGE_NONEPC;
    end else if (bi_enclave) begin
      verdict = VD_ABORT;        why = WHY_BI_OUTSIDE;
    end else begin
      verdict = VD_INSERT_XD;    why = WHY_OUTSIDE_XD;
    end
  end

endmodule
