// secs_store: the SECS fields the access control hardware needs, one record per EPC page
// that can hold a SECS.
//
// In SGX each enclave's control structure (SECS) sits in its own EPC page. This block keeps,
// for every EPC page used as a SECS, whether it exists, whether EINIT has run, the enclave's
// ELRANGE (base page and size in pages) and Stockade's 1-bit bi-enclave flag, which EINIT sets
// when the enclave is initialised as a bi-enclave.
//
// Ports: a create port (the unmodified ECREATE flow: records ELRANGE, clears the flags), an
// init port (EINIT: sets initialized and the bi-enclave flag) and one synchronous read port
// whose data appears one cycle after rd_en. If create and init hit the same record in one
// cycle, create wins. Flags are reset; ELRANGE storage is not (it is only read once exists).
// Keeping these fields in a dedicated array rather than reading the SECS page from memory is
// this design's choice.
module secs_store
  import stockade_pkg::*;
#(
  parameter int unsigned EPC_PAGES = 23936,
  localparam int unsigned IDX_W    = $clog2(EPC_PAGES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // ECREATE
  input  logic             create_en,
  input  logic [IDX_W-1:0] create_idx,
  input  vpn_t             create_base,
  input  vpn_t             create_pages,
  // EINIT
  input  logic             init_en,
  input  logic [IDX_W-1:0] init_idx,
  input  logic             init_bi,
  // read
  input  logic             rd_en,
  input  logic [IDX_W-1:0] rd_idx,
  output logic             rd_exists,
  output secs_t            rd_secs
);

  vpn_t                 base_mem  [EPC_PAGES];
  vpn_t                 pages_mem [EPC_PAGES];
  logic [EPC_PAGES-1:0] exists_q, init_q, bi_q;
  vpn_t                 rd_base_q, rd_pages_q;
  logic                 rd_exists_q, rd_init_q, rd_bi_q;

  always_ff @(posedge clk) begin
    if (create_en) begin
      base_mem[create_idx]  <= create_base;
      pages_mem[create_idx] <= create_pages;
    end
    if (rd_en) begin
      rd_base_q  <= base_mem[rd_idx];
      rd_pages_q <= pages_mem[rd_idx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exists_q    <= '0;
      init_q      <= '0;
      bi_q        <= '0;
      rd_exists_q <= 1'b0;
      rd_init_q   <= 1'b0;
      rd_bi_q     <= 1'b0;
    end else begin
      if (init_en) begin
        init_q[init_idx] <= 1'b1;
        bi_q[init_idx]   <= init_bi;
      end
      if (create_en) begin
        exists_q[create_idx] <= 1'b1;
        init_q[create_idx]   <= 1'b0;
        bi_q[create_idx]     <= 1'b0;
      end
      if (rd_en) begin
        rd_exists_q <= exists_q[rd_idx];
        rd_init_q   <= init_q[rd_idx];
        rd_bi_q     <= bi_q[rd_idx];
      end
    end
  end

  always_comb begin
    rd_exists             = rd_exists_q;
    rd_secs.initialized   = rd_init_q;
    rd_secs.bi_enclave    = rd_bi_q;
    rd_secs.elrange_base  = rd_base_q;
    rd_secs.elrange_pages = rd_pages_q;
  end

endmodule
