// id_cache: the IdCache half of the identity-mapping-aware remap cache.
//
// Each line covers a super-block of 32 contiguous 256 B blocks (8 kB) and holds
// one bit per block: 1 means the block is known to have an identity mapping
// (its device address equals its physical address). Following Fig 6 the access
// address splits into super-block ID [47:13], block-in-super-block [12:8] and
// offset [7:0]; the set is a hash of the super-block ID, and the paper fixes
// 256 sets of 16 ways. The hash itself is this design's choice: an XOR fold of
// the super-block ID into the set-index width. Because of the hash the whole
// super-block ID is kept as the tag.
//
// A lookup hits only when a line with the same super-block ID is present and the
// block's bit is 1. ID_SET installs a bit (allocating a line with just that bit
// if needed; invalid way first, then per-set FIFO), ID_CLEAR clears one bit,
// which is how the iRC invalidates an entry after an iRT update.
//
// Storage is one SRAM row per set (all ways and the FIFO pointer), read and
// written back in one cycle; after reset the rows are cleared one per cycle
// while ready is low. Lookup result one cycle after the request.
module id_cache
  import trimma_pkg::*;
#(
  parameter int unsigned SETS = 256,
  parameter int unsigned WAYS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        ready,
  input  logic        req_valid,
  input  logic [1:0]  req_op,
  input  addr_t       req_addr,
  output logic        rsp_valid,
  output logic        rsp_hit
);
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned SBID_W = PA_W - OFF_W - SB_BLK_W;
  localparam int unsigned NBITS  = 1 << SB_BLK_W;

  localparam logic [1:0] ID_LOOKUP = 2'd0;
  localparam logic [1:0] ID_SET    = 2'd1;
  localparam logic [1:0] ID_CLEAR  = 2'd2;

  typedef struct packed {
    logic              v;
    logic [SBID_W-1:0] tag;
    logic [NBITS-1:0]  bits;
  } way_t;

  typedef struct packed {
    logic [WAY_W-1:0] fifo;
    way_t [WAYS-1:0]  w;
  } row_t;

  row_t rows [SETS];

  logic             init_q;
  logic [SET_W-1:0] init_set_q;
  assign ready = !init_q;

  logic [SBID_W-1:0]   sbid;
  logic [SB_BLK_W-1:0] blk;
  assign sbid = req_addr[PA_W-1 : OFF_W+SB_BLK_W];
  assign blk  = req_addr[OFF_W +: SB_BLK_W];

  // XOR-fold hash of the super-block ID into the set index.
  function automatic logic [SET_W-1:0] hash_idx(input logic [SBID_W-1:0] id);
    logic [SET_W-1:0] h;
    h = '0;
    for (int i = 0; i < SBID_W; i += SET_W)
      for (int b = 0; b < SET_W; b++)
        if (i + b < SBID_W) h[b] = h[b] ^ id[i+b];
    return h;
  endfunction

  logic [SET_W-1:0] set_idx;
  assign set_idx = hash_idx(sbid);

  row_t row, row_new;
  assign row = rows[set_idx];

  logic [NBITS-1:0] blk_mask;
  assign blk_mask = NBITS'(1) << blk;

  logic             any_match, any_free;
  logic [WAY_W-1:0] match_way, free_way, fill_way;
  always_comb begin
    any_match = 1'b0;
    match_way = '0;
    any_free  = 1'b0;
    free_way  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (row.w[w].v && row.w[w].tag == sbid && !any_match) begin
        any_match = 1'b1;
        match_way = WAY_W'(w);
      end
      if (!row.w[w].v && !any_free) begin
        any_free = 1'b1;
        free_way = WAY_W'(w);
      end
    end
    if (any_match)     fill_way = match_way;
    else if (any_free) fill_way = free_way;
    else               fill_way = row.fifo;

    row_new = row;
    if (req_op == ID_SET) begin
      row_new.w[fill_way] = '{v: 1'b1, tag: sbid,
                              bits: any_match ? (row.w[match_way].bits | blk_mask) : blk_mask};
      if (!any_match && !any_free)
        row_new.fifo = (row.fifo == WAY_W'(WAYS-1)) ? '0 : row.fifo + 1'b1;
    end else if (req_op == ID_CLEAR && any_match) begin
      row_new.w[match_way].bits = row.w[match_way].bits & ~blk_mask;
    end
  end

  logic we;
  logic [SET_W-1:0] wr_set;
  row_t wr_row;
  always_comb begin
    we     = init_q || (req_valid && (req_op == ID_SET || req_op == ID_CLEAR));
    wr_set = init_q ? init_set_q : set_idx;
    wr_row = init_q ? '0 : row_new;
  end

  always_ff @(posedge clk) begin
    if (we) rows[wr_set] <= wr_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_set_q <= '0;
      rsp_valid  <= 1'b0;
      rsp_hit    <= 1'b0;
    end else begin
      if (init_q) begin
        init_set_q <= init_set_q + 1'b1;
        if (init_set_q == SET_W'(SETS - 1)) init_q <= 1'b0;
      end
      rsp_valid <= ready && req_valid && req_op == ID_LOOKUP;
      rsp_hit   <= ready && req_valid && req_op == ID_LOOKUP && any_match && row.w[match_way].bits[blk];
    end
  end

endmodule
