// share_ctrl: Stockade's ESADD and ESACCEPT instructions, which set up an EPC page shared by
// exactly two enclaves (owner and co-owner).
//
//   ESADD(page, target)  run by the owner enclave. Checks that the caller owns the regular EPC
//       page, that the page is not blocked, shared or offered already, and that `target` names
//       another enclave's SECS page. It then writes the target into the co-owner field, marks
//       the offer pending and blocks the page, flushes the TLB so no earlier translation can
//       reach the blocked page, and zeroes the page with one write per 64-byte line.
//   ESACCEPT(page)       run by the co-owner. Checks that the page was offered to the caller,
//       flushes the TLB ("TLB synchronisation") and commits the co-owner: blocked and pending
//       clear, co-owner valid set. From then on the access check lets both enclaves map it.
// Both are user-level enclave instructions: outside enclave mode they fail with
// ERR_NOT_ENCLAVE. Attestation of the two enclaves over the new page is software's job.
//
// Timing: accepted when op_valid && op_ready. The EPCM is read through a synchronous port,
// so each read costs one wait cycle. ESACCEPT completes 3 cycles after acceptance. ESADD reads
// the page and the target SECS entry, writes the entry, then issues 64 zero-line writes on the
// zero_* valid/ready port (one per cycle when zero_ready stays high) and completes on the last
// accepted write: 69 cycles with an always-ready memory. done pulses with err.
// What the paper fixes: the operands, zeroing, blocking until ESACCEPT, TLB synchronisation at
// ESACCEPT and the single co-owner. The pending flag, the TLB flush at ESADD, the error codes
// and the line-by-line zeroing port are this design's choices.
// zero_addr is line aligned, so its low 6 bits are always zero.
module share_ctrl
  import stockade_pkg::*;
#(
  parameter ppn_t        EPC_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned EPC_PAGES    = 23936,
  localparam int unsigned IDX_W       = $clog2(EPC_PAGES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // instruction
  input  logic             op_valid,
  output logic             op_ready,
  input  op_t              op,            // OP_ESADD or OP_ESACCEPT
  input  ppn_t             op_page,       // EPC page to share (physical page number)
  input  eid_t             op_target,     // ESADD: co-owner enclave (its SECS page number)
  output logic             done,
  output err_t             err,
  // context
  input  logic             enclave_mode,
  input  eid_t             cur_eid,
  // EPCM
  output logic             epcm_rd_en,
  output logic [IDX_W-1:0] epcm_rd_idx,
  input  epcm_entry_t      epcm_rd_entry,
  output logic             epcm_wr_en,
  output logic [IDX_W-1:0] epcm_wr_idx,
  output epcm_entry_t      epcm_wr_entry,
  // TLB
  output logic             tlb_flush,
  // page zeroing: write 64 zero bytes at zero_addr
  output logic             zero_valid,
  input  logic             zero_ready,
  output logic [PA_W-1:0]  zero_addr,
  output logic             busy
);

  typedef enum logic [2:0] {S_IDLE, S_RD_PAGE, S_CHK_PAGE, S_RD_TGT, S_CHK_TGT, S_ZERO} state_t;

  localparam int unsigned LINE_W = $clog2(LINES_PER_PAGE);
  localparam int unsigned LOFF_W = $clog2(LINE_BYTES);

  state_t             state_q;
  op_t                op_q;
  ppn_t               page_q;
  eid_t               tgt_q;
  epcm_entry_t        page_ent_q;
  logic [LINE_W-1:0]  line_q;

  ppn_t               page_off, tgt_off;
  logic               page_in_epc, tgt_in_epc;

  always_comb begin
    page_off    = op_page - EPC_BASE_PPN;
    tgt_off     = op_target - EPC_BASE_PPN;
    page_in_epc = (op_page >= EPC_BASE_PPN) && (page_off < ppn_t'(EPC_PAGES));
    tgt_in_epc  = (op_target >= EPC_BASE_PPN) && (tgt_off < ppn_t'(EPC_PAGES));
  end

  assign op_ready   = (state_q == S_IDLE);
  assign busy       = (state_q != S_IDLE);
  assign zero_valid = (state_q == S_ZERO);
  assign zero_addr  = {page_q, line_q, LOFF_W'(0)};

  always_comb begin
    epcm_rd_en  = (state_q == S_RD_PAGE) || (state_q == S_RD_TGT);
    epcm_rd_idx = (state_q == S_RD_TGT) ? IDX_W'(tgt_q - EPC_BASE_PPN)
                                        : IDX_W'(page_q - EPC_BASE_PPN);
  end

  logic pg_ok;   // entry just read is a valid regular page
  assign pg_ok = epcm_rd_entry.valid && (epcm_rd_entry.pt == PT_REG);

  // EPCM update: the offer at the end of ESADD's target check, the commit at ESACCEPT.
  logic offer_ok, accept_ok;
  always_comb begin
    offer_ok  = (state_q == S_CHK_TGT) && epcm_rd_entry.valid && (epcm_rd_entry.pt == PT_SECS) &&
                (tgt_q != cur_eid);
    accept_ok = (state_q == S_CHK_PAGE) && (op_q == OP_ESACCEPT) && pg_ok &&
                epcm_rd_entry.share_pending && (epcm_rd_entry.coowner == cur_eid);
    epcm_wr_en    = offer_ok || accept_ok;
    epcm_wr_idx   = IDX_W'(page_q - EPC_BASE_PPN);
    epcm_wr_entry = offer_ok ? page_ent_q : epcm_rd_entry;
    if (offer_ok) begin
      epcm_wr_entry.blocked       = 1'b1;
      epcm_wr_entry.share_pending = 1'b1;
      epcm_wr_entry.coowner_valid = 1'b0;
      epcm_wr_entry.coowner       = tgt_q;
    end else begin
      epcm_wr_entry.blocked       = 1'b0;
      epcm_wr_entry.share_pending = 1'b0;
      epcm_wr_entry.coowner_valid = 1'b1;
    end
    tlb_flush = epcm_wr_en;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      op_q       <= OP_ESADD;
      page_q     <= '0;
      tgt_q      <= '0;
      page_ent_q <= '0;
      line_q     <= '0;
      done       <= 1'b0;
      err        <= ERR_NONE;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (op_valid) begin
          op_q   <= op;
          page_q <= op_page;
          tgt_q  <= op_target;
          line_q <= '0;
          if (op != OP_ESADD && op != OP_ESACCEPT) begin
            done <= 1'b1; err <= ERR_BAD_OP;
          end else if (!enclave_mode) begin
            done <= 1'b1; err <= ERR_NOT_ENCLAVE;
          end else if (!page_in_epc) begin
            done <= 1'b1; err <= ERR_BAD_PAGE;
          end else if (op == OP_ESADD && !tgt_in_epc) begin
            done <= 1'b1; err <= ERR_BAD_SECS;
          end else begin
            state_q <= S_RD_PAGE;
          end
        end
        S_RD_PAGE: state_q <= S_CHK_PAGE;
        S_CHK_PAGE: begin
          page_ent_q <= epcm_rd_entry;
          state_q    <= S_IDLE;
          done       <= 1'b1;
          err        <= ERR_NONE;
          if (!pg_ok)                         err <= ERR_BAD_PAGE;
          else if (op_q == OP_ESADD) begin
            if (epcm_rd_entry.owner != cur_eid)              err <= ERR_NOT_OWNER;
            else if (epcm_rd_entry.blocked || epcm_rd_entry.share_pending ||
                     epcm_rd_entry.coowner_valid)            err <= ERR_BUSY;
            else begin
              done    <= 1'b0;
              state_q <= S_RD_TGT;
            end
          end else begin
            if (!epcm_rd_entry.share_pending)                err <= ERR_BAD_PAGE;
            else if (epcm_rd_entry.coowner != cur_eid)       err <= ERR_NOT_COOWNER;
          end
        end
        S_RD_TGT: state_q <= S_CHK_TGT;
        S_CHK_TGT: begin
          if (offer_ok) begin
            state_q <= S_ZERO;
          end else begin
            state_q <= S_IDLE;
            done    <= 1'b1;
            err     <= ERR_BAD_SECS;
          end
        end
        S_ZERO: if (zero_ready) begin
          line_q <= line_q + 1'b1;
          if (line_q == LINE_W'(LINES_PER_PAGE - 1)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
            err     <= ERR_NONE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
