// stockade_top: the memory access control of one SGX core with the Stockade extensions.
//
// Stockade lets an enclave run as a compartment that is protected in both directions: SGX keeps
// the OS and other enclaves out of it, and Stockade keeps it from reading, writing or running
// anything outside its own EPC memory, forbids it to leave through EEXIT, and lets it share
// single EPC pages with one other enclave as a protected channel. All of it is enforced where
// SGX already enforces enclave isolation: in the check made when a TLB miss is filled.
//
// Inside:
//   tlb_miss_handler + access_validator  serve core accesses; check every TLB miss
//   tlb                                  verified translations, abort-page and XD attributes
//   epcm                                 per-EPC-page ownership map with the co-owner field
//   secs_store                           per-enclave ELRANGE, initialised and bi-enclave flags
//   mode_ctrl                            EINIT / EENTER / ERESUME / EEXIT / AEX
//   share_ctrl                           ESADD / ESACCEPT
// Outside, reached through ports: the core (ins_* instruction port, acc_*/resp_* access port),
// the OS page-table walker (walk_*), the memory path that zeroes a shared page (zero_*), and
// the unchanged SGX flows that create enclaves and add pages (host_*), which write EPCM entries
// and SECS records directly.
//
// Ordering: the core issues one instruction or one access at a time. An instruction is
// accepted only while no access is in flight, and an access only while no instruction runs
// and no instruction is being offered (instructions win), so the EPCM is never read by the
// check while an instruction rewrites it. Nor is an access accepted in the cycle a flush is
// raised, so that no access looks up translations the flush is about to remove.
// ESADD/ESACCEPT writes to the EPCM take priority over host writes, which wait on
// host_epcm_wr_ready. Either controller's TLB flush clears the TLB.
// The routing of ops to the two controllers and the arbitration are this design's choices.
// zero_addr always points at the start of a 64-byte line, so its low 6 bits are constant zero.
module stockade_top
  import stockade_pkg::*;
#(
  parameter ppn_t        PRM_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned PRM_PAGES    = 32768,
  parameter ppn_t        EPC_BASE_PPN = ppn_t'('h80000),
  parameter int unsigned EPC_PAGES    = 23936,
  parameter int unsigned TLB_ENTRIES  = 64,
  parameter ppn_t        ABORT_PPN    = '1,
  localparam int unsigned IDX_W       = $clog2(EPC_PAGES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // enclave instructions from the core
  input  logic              ins_valid,
  output logic              ins_ready,
  input  op_t               ins_op,
  input  eid_t              ins_secs,     // EINIT/EENTER/ERESUME operand
  input  logic              ins_bi,       // EINIT: make a bi-enclave
  input  ppn_t              ins_page,     // ESADD/ESACCEPT operand
  input  eid_t              ins_target,   // ESADD co-owner
  output logic              ins_done,
  output err_t              ins_err,
  // memory accesses from the core
  input  logic              acc_valid,
  output logic              acc_ready,
  input  logic [VA_W-1:0]   acc_va,
  input  acc_t              acc_type,
  output logic              resp_valid,
  output logic [PA_W-1:0]   resp_pa,
  output logic              resp_fault,
  output logic              resp_abort,
  output logic              resp_xd,
  // page walker
  output logic              walk_req_valid,
  output vpn_t              walk_req_vpn,
  input  logic              walk_resp_valid,
  input  ppn_t              walk_resp_ppn,
  input  logic              walk_resp_fault,
  // page zeroing writes toward the memory encryption engine
  output logic              zero_valid,
  input  logic              zero_ready,
  output logic [PA_W-1:0]   zero_addr,
  // unchanged SGX flows (ECREATE / EADD / EREMOVE)
  input  logic              host_epcm_wr_en,
  output logic              host_epcm_wr_ready,
  input  logic [IDX_W-1:0]  host_epcm_wr_idx,
  input  epcm_entry_t       host_epcm_wr_entry,
  input  logic              host_secs_create_en,
  input  logic [IDX_W-1:0]  host_secs_create_idx,
  input  vpn_t              host_secs_elrange_base,
  input  vpn_t              host_secs_elrange_pages,
  // status
  output logic              enclave_mode,
  output eid_t              cur_eid,
  output logic              bi_enclave,
  output logic              tlb_flush,
  output logic              chk_valid,
  output verdict_t          chk_verdict,
  output why_t              chk_why
);

  // ---------------- context and controllers ----------------
  vpn_t             elrange_base, elrange_pages;
  logic             mc_ready, mc_done, sc_ready, sc_done, mh_busy;
  err_t             mc_err, sc_err;
  logic             mc_flush, sc_flush;
  logic             is_share_op, ctrl_idle;

  logic             secs_rd_en, secs_rd_exists, secs_init_en, secs_init_bi;
  logic [IDX_W-1:0] secs_rd_idx, secs_init_idx;
  secs_t            secs_rd;

  logic             mh_epcm_rd_en, sc_epcm_rd_en, sc_epcm_wr_en;
  logic [IDX_W-1:0] mh_epcm_rd_idx, sc_epcm_rd_idx, sc_epcm_wr_idx;
  epcm_entry_t      mh_epcm_rd, sc_epcm_rd, sc_epcm_wr;

  assign is_share_op = (ins_op == OP_ESADD) || (ins_op == OP_ESACCEPT);
  assign ctrl_idle   = mc_ready && sc_ready;
  assign ins_ready   = ctrl_idle && !mh_busy;
  assign ins_done    = mc_done || sc_done;
  assign ins_err     = mc_done ? mc_err : sc_err;
  assign tlb_flush   = mc_flush || sc_flush;

  mode_ctrl #(
    .EPC_BASE_PPN (EPC_BASE_PPN),
    .EPC_PAGES    (EPC_PAGES)
  ) u_mode (
    .clk            (clk),
    .rst_n          (rst_n),
    .op_valid       (ins_valid && ins_ready && !is_share_op),
    .op_ready       (mc_ready),
    .op             (ins_op),
    .op_secs        (ins_secs),
    .op_bi          (ins_bi),
    .done           (mc_done),
    .err            (mc_err),
    .secs_rd_en     (secs_rd_en),
    .secs_rd_idx    (secs_rd_idx),
    .secs_rd_exists (secs_rd_exists),
    .secs_rd        (secs_rd),
    .secs_init_en   (secs_init_en),
    .secs_init_idx  (secs_init_idx),
    .secs_init_bi   (secs_init_bi),
    .enclave_mode   (enclave_mode),
    .cur_eid        (cur_eid),
    .bi_enclave     (bi_enclave),
    .elrange_base   (elrange_base),
    .elrange_pages  (elrange_pages),
    .tlb_flush      (mc_flush)
  );

  logic sc_busy;
  share_ctrl #(
    .EPC_BASE_PPN (EPC_BASE_PPN),
    .EPC_PAGES    (EPC_PAGES)
  ) u_share (
    .clk           (clk),
    .rst_n         (rst_n),
    .op_valid      (ins_valid && ins_ready && is_share_op),
    .op_ready      (sc_ready),
    .op            (ins_op),
    .op_page       (ins_page),
    .op_target     (ins_target),
    .done          (sc_done),
    .err           (sc_err),
    .enclave_mode  (enclave_mode),
    .cur_eid       (cur_eid),
    .epcm_rd_en    (sc_epcm_rd_en),
    .epcm_rd_idx   (sc_epcm_rd_idx),
    .epcm_rd_entry (sc_epcm_rd),
    .epcm_wr_en    (sc_epcm_wr_en),
    .epcm_wr_idx   (sc_epcm_wr_idx),
    .epcm_wr_entry (sc_epcm_wr),
    .tlb_flush     (sc_flush),
    .zero_valid    (zero_valid),
    .zero_ready    (zero_ready),
    .zero_addr     (zero_addr),
    .busy          (sc_busy)
  );

  // ---------------- tables ----------------
  logic             epcm_wr_en;
  logic [IDX_W-1:0] epcm_wr_idx;
  epcm_entry_t      epcm_wr;

  assign host_epcm_wr_ready = !sc_epcm_wr_en;
  assign epcm_wr_en  = sc_epcm_wr_en || host_epcm_wr_en;
  assign epcm_wr_idx = sc_epcm_wr_en ? sc_epcm_wr_idx : host_epcm_wr_idx;
  assign epcm_wr     = sc_epcm_wr_en ? sc_epcm_wr     : host_epcm_wr_entry;

  epcm #(
    .EPC_PAGES (EPC_PAGES)
  ) u_epcm (
    .clk       (clk),
    .rst_n     (rst_n),
    .rda_en    (mh_epcm_rd_en),
    .rda_idx   (mh_epcm_rd_idx),
    .rda_entry (mh_epcm_rd),
    .rdb_en    (sc_epcm_rd_en),
    .rdb_idx   (sc_epcm_rd_idx),
    .rdb_entry (sc_epcm_rd),
    .wr_en     (epcm_wr_en),
    .wr_idx    (epcm_wr_idx),
    .wr_entry  (epcm_wr)
  );

  secs_store #(
    .EPC_PAGES (EPC_PAGES)
  ) u_secs (
    .clk          (clk),
    .rst_n        (rst_n),
    .create_en    (host_secs_create_en),
    .create_idx   (host_secs_create_idx),
    .create_base  (host_secs_elrange_base),
    .create_pages (host_secs_elrange_pages),
    .init_en      (secs_init_en),
    .init_idx     (secs_init_idx),
    .init_bi      (secs_init_bi),
    .rd_en        (secs_rd_en),
    .rd_idx       (secs_rd_idx),
    .rd_exists    (secs_rd_exists),
    .rd_secs      (secs_rd)
  );

  // ---------------- translation ----------------
  vpn_t tlb_lk_vpn, tlb_fill_vpn;
  ppn_t tlb_lk_ppn, tlb_fill_ppn;
  logic tlb_lk_hit, tlb_lk_xd, tlb_lk_abort;
  logic tlb_fill_en, tlb_fill_xd, tlb_fill_abort;
  logic mh_req_ready;

  assign acc_ready = mh_req_ready && ctrl_idle && !ins_valid && !tlb_flush;

  tlb #(
    .ENTRIES (TLB_ENTRIES)
  ) u_tlb (
    .clk        (clk),
    .rst_n      (rst_n),
    .lk_vpn     (tlb_lk_vpn),
    .lk_hit     (tlb_lk_hit),
    .lk_ppn     (tlb_lk_ppn),
    .lk_xd      (tlb_lk_xd),
    .lk_abort   (tlb_lk_abort),
    .fill_en    (tlb_fill_en),
    .fill_vpn   (tlb_fill_vpn),
    .fill_ppn   (tlb_fill_ppn),
    .fill_xd    (tlb_fill_xd),
    .fill_abort (tlb_fill_abort),
    .flush      (tlb_flush)
  );

  tlb_miss_handler #(
    .PRM_BASE_PPN (PRM_BASE_PPN),
    .PRM_PAGES    (PRM_PAGES),
    .EPC_BASE_PPN (EPC_BASE_PPN),
    .EPC_PAGES    (EPC_PAGES),
    .ABORT_PPN    (ABORT_PPN)
  ) u_mh (
    .clk             (clk),
    .rst_n           (rst_n),
    .req_valid       (acc_valid && acc_ready),
    .req_ready       (mh_req_ready),
    .req_va          (acc_va),
    .req_acc         (acc_type),
    .resp_valid      (resp_valid),
    .resp_pa         (resp_pa),
    .resp_fault      (resp_fault),
    .resp_abort      (resp_abort),
    .resp_xd         (resp_xd),
    .enclave_mode    (enclave_mode),
    .bi_enclave      (bi_enclave),
    .cur_eid         (cur_eid),
    .elrange_base    (elrange_base),
    .elrange_pages   (elrange_pages),
    .walk_req_valid  (walk_req_valid),
    .walk_req_vpn    (walk_req_vpn),
    .walk_resp_valid (walk_resp_valid),
    .walk_resp_ppn   (walk_resp_ppn),
    .walk_resp_fault (walk_resp_fault),
    .epcm_rd_en      (mh_epcm_rd_en),
    .epcm_rd_idx     (mh_epcm_rd_idx),
    .epcm_rd_entry   (mh_epcm_rd),
    .tlb_lk_vpn      (tlb_lk_vpn),
    .tlb_lk_hit      (tlb_lk_hit),
    .tlb_lk_ppn      (tlb_lk_ppn),
    .tlb_lk_xd       (tlb_lk_xd),
    .tlb_lk_abort    (tlb_lk_abort),
    .tlb_fill_en     (tlb_fill_en),
    .tlb_fill_vpn    (tlb_fill_vpn),
    .tlb_fill_ppn    (tlb_fill_ppn),
    .tlb_fill_xd     (tlb_fill_xd),
    .tlb_fill_abort  (tlb_fill_abort),
    .chk_valid       (chk_valid),
    .chk_verdict     (chk_verdict),
    .chk_why         (chk_why),
    .busy            (mh_busy)
  );

  // A controller never runs while the miss handler has a request in flight.
  a_serial: assert property (@(posedge clk) disable iff (!rst_n) !(mh_busy && (sc_busy || !mc_ready)))
    else $error("stockade_top: instruction and access in flight together");

endmodule
