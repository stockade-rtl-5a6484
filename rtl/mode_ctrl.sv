// mode_ctrl: enclave mode state and the enclave-entry/exit instructions, with Stockade's
// changes to EINIT and EEXIT.
//
// It holds the current execution context the access check reads: whether the core executes
// enclave code, the current enclave ID (its SECS page number), that enclave's bi-enclave flag
// and its ELRANGE. Instructions:
//   EINIT  (outside enclave mode) marks a created SECS initialised and, for Stockade, stores
//          the bi-enclave flag requested with it.
//   EENTER / ERESUME (outside enclave mode) load the context of an initialised enclave.
//   EEXIT  (in enclave mode) leaves enclave mode, except that for a bi-enclave it is aborted
//          with ERR_EEXIT_BI and the core stays in the enclave (Stockade).
//   AEX    (asynchronous exit on an exception or interrupt) always leaves enclave mode, for
//          bi-enclaves too; saving and scrubbing register state is outside this block.
// Every mode change pulses tlb_flush, since SGX flushes the TLB on mode transitions.
//
// Timing: an op is accepted when op_valid && op_ready. Ops that read the SECS (EINIT, EENTER,
// ERESUME) finish 3 cycles later, EEXIT and AEX 2 cycles later; done pulses for one cycle with
// err. The operand encoding and error codes are this design's choices.
module mode_ctrl
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
  input  op_t              op,
  input  eid_t             op_secs,      // SECS page number (EINIT, EENTER, ERESUME)
  input  logic             op_bi,        // EINIT: initialise as a bi-enclave
  output logic             done,
  output err_t             err,
  // SECS store
  output logic             secs_rd_en,
  output logic [IDX_W-1:0] secs_rd_idx,
  input  logic             secs_rd_exists,
  input  secs_t            secs_rd,
  output logic             secs_init_en,
  output logic [IDX_W-1:0] secs_init_idx,
  output logic             secs_init_bi,
  // context
  output logic             enclave_mode,
  output eid_t             cur_eid,
  output logic             bi_enclave,
  output vpn_t             elrange_base,
  output vpn_t             elrange_pages,
  output logic             tlb_flush
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_EXEC} state_t;

  state_t           state_q;
  op_t              op_q;
  eid_t             secs_q;
  logic             bi_q;
  logic             idx_ok_q;
  ppn_t             off;

  assign op_ready    = (state_q == S_IDLE);
  assign off         = op_secs - EPC_BASE_PPN;
  assign secs_rd_en  = (state_q == S_READ);
  assign secs_rd_idx = IDX_W'(secs_q - EPC_BASE_PPN);

  // EINIT write happens in S_EXEC when its checks pass.
  always_comb begin
    secs_init_en  = 1'b0;
    secs_init_idx = IDX_W'(secs_q - EPC_BASE_PPN);
    secs_init_bi  = bi_q;
    if (state_q == S_EXEC && op_q == OP_EINIT && idx_ok_q && secs_rd_exists && !secs_rd.initialized)
      secs_init_en = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      op_q          <= OP_EINIT;
      secs_q        <= '0;
      bi_q          <= 1'b0;
      idx_ok_q      <= 1'b0;
      done          <= 1'b0;
      err           <= ERR_NONE;
      enclave_mode  <= 1'b0;
      cur_eid       <= '0;
      bi_enclave    <= 1'b0;
      elrange_base  <= '0;
      elrange_pages <= '0;
      tlb_flush     <= 1'b0;
    end else begin
      done      <= 1'b0;
      tlb_flush <= 1'b0;
      unique case (state_q)
        S_IDLE: if (op_valid) begin
          op_q     <= op;
          secs_q   <= op_secs;
          bi_q     <= op_bi;
          idx_ok_q <= (op_secs >= EPC_BASE_PPN) && (off < ppn_t'(EPC_PAGES));
          unique case (op)
            OP_EINIT, OP_EENTER, OP_ERESUME: state_q <= S_READ;
            OP_EEXIT, OP_AEX:                state_q <= S_EXEC;
            default: begin
              done <= 1'b1;
              err  <= ERR_BAD_OP;
            end
          endcase
        end
        S_READ: state_q <= S_EXEC;
        S_EXEC: begin
          state_q <= S_IDLE;
          done    <= 1'b1;
          err     <= ERR_NONE;
          unique case (op_q)
            OP_EINIT: begin
              if (enclave_mode)                         err <= ERR_IN_ENCLAVE;
              else if (!idx_ok_q || !secs_rd_exists)    err <= ERR_BAD_SECS;
              else if (secs_rd.initialized)             err <= ERR_ALREADY_INIT;
            end
            OP_EENTER, OP_ERESUME: begin
              if (enclave_mode)                         err <= ERR_IN_ENCLAVE;
              else if (!idx_ok_q || !secs_rd_exists)    err <= ERR_BAD_SECS;
              else if (!secs_rd.initialized)            err <= ERR_NOT_INIT;
              else begin
                enclave_mode  <= 1'b1;
                cur_eid       <= secs_q;
                bi_enclave    <= secs_rd.bi_enclave;
                elrange_base  <= secs_rd.elrange_base;
                elrange_pages <= secs_rd.elrange_pages;
                tlb_flush     <= 1'b1;
              end
            end
            OP_EEXIT: begin
              if (!enclave_mode)                        err <= ERR_NOT_ENCLAVE;
              else if (bi_enclave)                      err <= ERR_EEXIT_BI;
              else begin
                enclave_mode <= 1'b0;
                tlb_flush    <= 1'b1;
              end
            end
            OP_AEX: begin
              if (!enclave_mode)                        err <= ERR_NOT_ENCLAVE;
              else begin
                enclave_mode <= 1'b0;
                tlb_flush    <= 1'b1;
              end
            end
            default: err <= ERR_BAD_OP;
          endcase
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
