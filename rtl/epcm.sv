// epcm: Enclave Page Cache Map, one entry per EPC page, extended with Stockade's co-owner.
//
// An entry records whether the EPC page is in use, whether it is blocked, its page type, the
// owning enclave (its SECS page number), the enclave virtual page it must be mapped at and,
// for Stockade, one co-owner enclave allowed to share the page. Only the processor's access
// control logic reads or writes the map; software cannot reach it.
//
// Structure: a memory of EPC_PAGES entries with two synchronous read ports (one for the TLB
// miss handler, one for the instruction controllers) and one write port. Reads return the
// entry one cycle after rd_en; a read and a write of the same index in the same cycle return
// the old entry. The valid bits live in a separate flop vector that reset clears, so the large
// array needs no reset. The entry count is this design's choice (the paper gives no EPC size):
// 23936 pages is a 93.5 MiB EPC as in client processors of the evaluated generation.
module epcm
  import stockade_pkg::*;
#(
  parameter int unsigned EPC_PAGES = 23936,
  localparam int unsigned IDX_W    = $clog2(EPC_PAGES)
) (
  input  logic                clk,
  input  logic                rst_n,
  // read port A
  input  logic                rda_en,
  input  logic [IDX_W-1:0]    rda_idx,
  output epcm_entry_t         rda_entry,
  // read port B
  input  logic                rdb_en,
  input  logic [IDX_W-1:0]    rdb_idx,
  output epcm_entry_t         rdb_entry,
  // write port
  input  logic                wr_en,
  input  logic [IDX_W-1:0]    wr_idx,
  input  epcm_entry_t         wr_entry
);

  epcm_entry_t            mem [EPC_PAGES];
  logic [EPC_PAGES-1:0]   valid_q;
  epcm_entry_t            rda_q, rdb_q;
  logic                   rda_v_q, rdb_v_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_entry;
    if (rda_en) rda_q <= mem[rda_idx];
    if (rdb_en) rdb_q <= mem[rdb_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rda_v_q <= 1'b0;
      rdb_v_q <= 1'b0;
    end else begin
      if (rda_en) rda_v_q <= valid_q[rda_idx];
      if (rdb_en) rdb_v_q <= valid_q[rdb_idx];
      if (wr_en)  valid_q[wr_idx] <= wr_entry.valid;
    end
  end

  always_comb begin
    rda_entry       = rda_q;
    rda_entry.valid = rda_v_q;
    rdb_entry       = rdb_q;
    rdb_entry.valid = rdb_v_q;
  end

  // An index past the last EPC page is a caller error.
  a_wr_idx:  assert property (@(posedge clk) disable iff (!rst_n) wr_en  |-> wr_idx  < IDX_W'(EPC_PAGES))
    else $error("epcm: write index out of range");
  a_rda_idx: assert property (@(posedge clk) disable iff (!rst_n) rda_en |-> rda_idx < IDX_W'(EPC_PAGES))
    else $error("epcm: read A index out of range");
  a_rdb_idx: assert property (@(posedge clk) disable iff (!rst_n) rdb_en |-> rdb_idx < IDX_W'(EPC_PAGES))
    else $error("epcm: read B index out of range");

endmodule
