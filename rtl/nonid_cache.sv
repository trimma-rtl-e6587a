// nonid_cache: the NonIdCache half of the identity-mapping-aware remap cache.
//
// A set-associative SRAM cache of non-identity remap entries, one remapped block
// tag (the "pointer") per line. The paper fixes the organisation at 2048 sets of
// 6 ways and the address split of Fig 6: block offset [7:0], set index [18:8],
// tag [47:19]. Everything else is this design's choice: the per-set FIFO fill
// order (an invalid way is taken first), the one-cycle registered lookup, and a
// fill of an address already present overwriting that line.
//
// Storage is one SRAM row per set holding all ways and the set's FIFO pointer;
// every operation reads the row and, for fills and invalidations, writes it back
// in the same cycle. After reset the rows are cleared one per cycle; ready stays
// low for those SETS cycles.
//
// Interface: one operation per cycle when req_valid is high (and ready).
//   NIC_LOOKUP : rsp_valid pulses one cycle later with rsp_hit / rsp_ptr.
//   NIC_FILL   : install (addr -> fill_ptr).
//   NIC_INVAL  : drop the line of addr if present.
module nonid_cache
  import trimma_pkg::*;
#(
  parameter int unsigned SETS = 2048,
  parameter int unsigned WAYS = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        ready,
  input  logic        req_valid,
  input  logic [1:0]  req_op,
  input  addr_t       req_addr,
  input  btag_t       fill_ptr,
  output logic        rsp_valid,
  output logic        rsp_hit,
  output btag_t       rsp_ptr
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = PA_W - OFF_W - SET_W;

  localparam logic [1:0] NIC_LOOKUP = 2'd0;
  localparam logic [1:0] NIC_FILL   = 2'd1;
  localparam logic [1:0] NIC_INVAL  = 2'd2;

  typedef struct packed {
    logic             v;
    logic [TAG_W-1:0] tag;
    btag_t            ptr;
  } way_t;

  typedef struct packed {
    logic [WAY_W-1:0]      fifo;
    way_t [WAYS-1:0]       w;
  } row_t;

  row_t rows [SETS];

  // reset sweep
  logic             init_q;
  logic [SET_W-1:0] init_set_q;
  assign ready = !init_q;

  logic [SET_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  assign set_idx = req_addr[OFF_W +: SET_W];
  assign tag     = req_addr[PA_W-1 : OFF_W+SET_W];

  row_t row, row_new;
  assign row = rows[set_idx];

  logic             any_match, any_free;
  logic [WAY_W-1:0] match_way, free_way, fill_way;
  always_comb begin
    any_match = 1'b0;
    match_way = '0;
    any_free  = 1'b0;
    free_way  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (row.w[w].v && row.w[w].tag == tag && !any_match) begin
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
    if (req_op == NIC_FILL) begin
      row_new.w[fill_way] = '{v: 1'b1, tag: tag, ptr: fill_ptr};
      if (!any_match && !any_free)
        row_new.fifo = (row.fifo == WAY_W'(WAYS-1)) ? '0 : row.fifo + 1'b1;
    end else if (req_op == NIC_INVAL && any_match) begin
      row_new.w[match_way].v = 1'b0;
    end
  end

  logic we;
  logic [SET_W-1:0] wr_set;
  row_t wr_row;
  always_comb begin
    we     = init_q || (req_valid && (req_op == NIC_FILL || req_op == NIC_INVAL));
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
      rsp_ptr    <= '0;
    end else begin
      if (init_q) begin
        init_set_q <= init_set_q + 1'b1;
        if (init_set_q == SET_W'(SETS - 1)) init_q <= 1'b0;
      end
      rsp_valid <= ready && req_valid && req_op == NIC_LOOKUP;
      rsp_hit   <= ready && req_valid && req_op == NIC_LOOKUP && any_match;
      rsp_ptr   <= row.w[match_way].ptr;
    end
  end

endmodule
