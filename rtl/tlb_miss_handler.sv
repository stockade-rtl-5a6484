// tlb_miss_handler: serves the core's memory accesses through the TLB and runs the Stockade
// access check on every TLB miss.
//
// Flow for one access (req_* accepted while req_ready is high):
//   hit : the TLB entry answers; the response is registered and appears the next cycle.
//   miss: WALK   - ask the page walker for the OS translation of the page and wait;
//         READ   - read the EPCM entry of the walked physical page;
//         CHECK  - access_validator decides; anything but a page fault is filled into the
//                  TLB (abort page or XD attribute included) and the response is registered.
// So a hit answers 1 cycle after acceptance and a miss 3 cycles after the walker answers.
// The access check is made only on a miss, never on a hit, as in SGX.
//
// Response: resp_pa is the translated address. For an abort verdict the walked address is
// replaced by the abort page (ABORT_PPN), both in the TLB entry and in resp_pa, and resp_abort
// is set: the memory side gives the abort page SGX's semantics (reads see all ones, writes are
// dropped). The abort page's address is this design's choice (all-ones page number by
// default, above any DRAM). resp_fault is a
// page fault, either from the check, from the walker (no OS mapping) or from an instruction
// fetch to an XD page (resp_xd marks the last case). chk_* report each check for tracing.
// Handshakes and state names are this design's choices; the check itself is the paper's.
// tlb_lk_vpn is the request's page number wired straight through: the TLB is looked up
// combinationally in the cycle the request is offered.
module tlb_miss_handler
  import stockade_pkg::*;
#(
  parameter ppn_t        PRM_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned PRM_PAGES    = 32768,
  parameter ppn_t        EPC_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned EPC_PAGES    = 23936,
  parameter ppn_t        ABORT_PPN    = '1,
  localparam int unsigned IDX_W       = $clog2(EPC_PAGES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // access request from the core
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [VA_W-1:0]   req_va,
  input  acc_t              req_acc,
  // response
  output logic              resp_valid,
  output logic [PA_W-1:0]   resp_pa,
  output logic              resp_fault,
  output logic              resp_abort,
  output logic              resp_xd,
  // execution context
  input  logic              enclave_mode,
  input  logic              bi_enclave,
  input  eid_t              cur_eid,
  input  vpn_t              elrange_base,
  input  vpn_t              elrange_pages,
  // page walker
  output logic              walk_req_valid,
  output vpn_t              walk_req_vpn,
  input  logic              walk_resp_valid,
  input  ppn_t              walk_resp_ppn,
  input  logic              walk_resp_fault,
  // EPCM read port
  output logic              epcm_rd_en,
  output logic [IDX_W-1:0]  epcm_rd_idx,
  input  epcm_entry_t       epcm_rd_entry,
  // TLB
  output vpn_t              tlb_lk_vpn,
  input  logic              tlb_lk_hit,
  input  ppn_t              tlb_lk_ppn,
  input  logic              tlb_lk_xd,
  input  logic              tlb_lk_abort,
  output logic              tlb_fill_en,
  output vpn_t              tlb_fill_vpn,
  output ppn_t              tlb_fill_ppn,
  output logic              tlb_fill_xd,
  output logic              tlb_fill_abort,
  // trace of each check
  output logic              chk_valid,
  output verdict_t          chk_verdict,
  output why_t              chk_why,
  output logic              busy
);

  typedef enum logic [1:0] {S_IDLE, S_WALK, S_READ, S_CHECK} state_t;

  state_t            state_q;
  vpn_t              vpn_q;
  logic [PAGE_SHIFT-1:0] off_q;
  acc_t              acc_q;
  ppn_t              ppn_q;

  verdict_t          v_verdict;
  why_t              v_why;
  ppn_t              epc_off;

  access_validator #(
    .PRM_BASE_PPN (PRM_BASE_PPN),
    .PRM_PAGES    (PRM_PAGES),
    .EPC_BASE_PPN (EPC_BASE_PPN),
    .EPC_PAGES    (EPC_PAGES)
  ) u_validator (
    .enclave_mode  (enclave_mode),
    .bi_enclave    (bi_enclave),
    .cur_eid       (cur_eid),
    .elrange_base  (elrange_base),
    .elrange_pages (elrange_pages),
    .vpn           (vpn_q),
    .ppn           (ppn_q),
    .epcm          (epcm_rd_entry),
    .in_prm        (),               // the verdict already encodes both
    .in_epc        (),
    .verdict       (v_verdict),
    .why           (v_why)
  );

  assign req_ready      = (state_q == S_IDLE);
  assign busy           = (state_q != S_IDLE);
  assign tlb_lk_vpn     = req_va[VA_W-1:PAGE_SHIFT];
  assign walk_req_valid = (state_q == S_WALK);
  assign walk_req_vpn   = vpn_q;

  // EPCM index of the walked page; outside the EPC the read is harmless and ignored.
  always_comb begin
    epc_off     = ppn_q - EPC_BASE_PPN;
    epcm_rd_en  = (state_q == S_READ);
    epcm_rd_idx = (epc_off < ppn_t'(EPC_PAGES)) ? epc_off[IDX_W-1:0] : '0;
  end

  always_comb begin
    tlb_fill_en    = (state_q == S_CHECK) && (v_verdict != VD_PAGEFAULT);
    tlb_fill_vpn   = vpn_q;
    tlb_fill_ppn   = (v_verdict == VD_ABORT) ? ABORT_PPN : ppn_q;
    tlb_fill_xd    = (v_verdict == VD_INSERT_XD);
    tlb_fill_abort = (v_verdict == VD_ABORT);
    chk_valid      = (state_q == S_CHECK);
    chk_verdict    = v_verdict;
    chk_why        = v_why;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      vpn_q      <= '0;
      off_q      <= '0;
      acc_q      <= ACC_READ;
      ppn_q      <= '0;
      resp_valid <= 1'b0;
      resp_pa    <= '0;
      resp_fault <= 1'b0;
      resp_abort <= 1'b0;
      resp_xd    <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          vpn_q <= req_va[VA_W-1:PAGE_SHIFT];
          off_q <= req_va[PAGE_SHIFT-1:0];
          acc_q <= req_acc;
          if (tlb_lk_hit) begin
            resp_valid <= 1'b1;
            resp_pa    <= {tlb_lk_ppn, req_va[PAGE_SHIFT-1:0]};
            resp_abort <= tlb_lk_abort;
            resp_xd    <= tlb_lk_xd && (req_acc == ACC_EXEC) && !tlb_lk_abort;
            resp_fault <= tlb_lk_xd && (req_acc == ACC_EXEC) && !tlb_lk_abort;
          end else begin
            state_q <= S_WALK;
          end
        end
        S_WALK: if (walk_resp_valid) begin
          if (walk_resp_fault) begin
            resp_valid <= 1'b1;
            resp_pa    <= '0;
            resp_fault <= 1'b1;
            resp_abort <= 1'b0;
            resp_xd    <= 1'b0;
            state_q    <= S_IDLE;
          end else begin
            ppn_q   <= walk_resp_ppn;
            state_q <= S_READ;
          end
        end
        S_READ: state_q <= S_CHECK;
        S_CHECK: begin
          resp_valid <= 1'b1;
          resp_pa    <= {(v_verdict == VD_ABORT) ? ABORT_PPN : ppn_q, off_q};
          resp_abort <= (v_verdict == VD_ABORT);
          resp_xd    <= (v_verdict == VD_INSERT_XD) && (acc_q == ACC_EXEC);
          resp_fault <= (v_verdict == VD_PAGEFAULT) ||
                        ((v_verdict == VD_INSERT_XD) && (acc_q == ACC_EXEC));
          state_q    <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The walker must only answer while a walk is outstanding.
  a_walk_resp: assert property (@(posedge clk) disable iff (!rst_n) walk_resp_valid |-> state_q == S_WALK)
    else $error("tlb_miss_handler: walk response without request");

endmodule
