// victim_sel: FIFO replacement over a set's fast slots, including the iRT
// metadata blocks that are currently unused.
//
// The candidates of a set are its leaf-metadata slots and its cache/flat slots,
// fast slots [INT_BLKS, FAST_PER_SET) in the numbering of irt_ctrl (index blocks
// are always metadata and never candidates). A per-set FIFO pointer walks them in
// order. A leaf slot is only usable while its index bit is 0; the selector reads
// that bit from the set's index bit vector in fast memory and skips the slot when
// the bit is 1 (the FIFO rule of the paper).
//
// Index-bit buffer and prefetch: because the FIFO walks the slots in order, the
// index bits it needs next are known in advance. Each set has a one-word (32
// bit) buffer holding the index word that covers its FIFO pointer, 4 bytes per
// set. Whenever the selector is idle and pf_allow is high, it checks one set per
// cycle (round robin) and, if that set's pointer is on a leaf slot whose index
// word is not buffered, reads the word ahead of time (prefetch pulses). A victim
// request then normally finds its bits on chip; on a buffer miss it reads the
// word itself. All buffers snoop metadata writes, so they never go stale. The
// paper describes prefetching the next chunk of index bits into a buffer of a
// few bytes; the per-set layout of the buffer and the round-robin idle prefetch
// are this design's choices.
//
// Interface: req_valid with req_set while req_ready; done pulses with victim (a
// slot tag) when a usable slot is found; skip pulses for each metadata slot that
// was passed over. Index reads use an in-order metadata port like irt_ctrl's;
// pf_busy is high from the start of a prefetch until its data has returned, and
// the owner of the metadata port must leave it to the selector meanwhile.
// pf_allow may only be high while no other unit has a read outstanding.
module victim_sel
  import trimma_pkg::*;
#(
  parameter int unsigned NSETS        = 4,
  parameter int unsigned FAST_PER_SET = 655360,
  parameter int unsigned SLOW_PER_SET = 20971520
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic [$clog2(NSETS > 1 ? NSETS : 2)-1:0] req_set,
  output logic  done,
  output btag_t victim,
  output logic  skip,
  // metadata port (reads only)
  output logic  md_req_valid,
  input  logic  md_req_ready,
  output addr_t md_addr,
  input  logic  md_rsp_valid,
  input  word_t md_rdata,
  // snoop of every metadata write
  input  logic  pf_allow,
  output logic  pf_busy,
  output logic  prefetch,
  input  logic  snoop_we,
  input  addr_t snoop_addr,
  input  word_t snoop_wdata
);
  localparam int unsigned SET_W     = $clog2(NSETS > 1 ? NSETS : 2);
  localparam longint unsigned TOTAL = longint'(FAST_PER_SET) + longint'(SLOW_PER_SET);
  localparam longint unsigned LEAF_BLKS = (TOTAL + longint'(WORDS_PER_BLK) - 1) / longint'(WORDS_PER_BLK);
  localparam longint unsigned INT_BLKS  = (LEAF_BLKS + (1 << IDXBIT_W) - 1) >> IDXBIT_W;
  localparam longint unsigned META_BLKS = INT_BLKS + LEAF_BLKS;

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_RD, S_WAIT, S_PF_RD, S_PF_WAIT} state_e;

  state_e state_q;
  logic [SET_W-1:0] set_q;
  btag_t  fifo_q [NSETS];
  btag_t  cand_q;
  logic   ibuf_v_q    [NSETS];
  addr_t  ibuf_addr_q [NSETS];
  word_t  ibuf_q      [NSETS];
  logic [SET_W-1:0] pf_set_q;

  // Fast-memory address of the index word that holds the bit of the leaf block
  // stored in slot s of set k.
  function automatic addr_t idx_word_addr(input logic [SET_W-1:0] k, input btag_t s);
    longint unsigned leaf;
    leaf = longint'(s) - INT_BLKS;
    return addr_t'((((leaf >> IDXBIT_W) * NSETS + longint'(k)) << OFF_W)
                   + (((leaf >> 5) & (longint'(WORDS_PER_BLK) - 1)) << 2));
  endfunction

  // Index word and bit of the leaf held in candidate slot cand_q.
  addr_t  widx_addr;
  logic [4:0] bidx;
  always_comb begin
    widx_addr = idx_word_addr(set_q, cand_q);
    bidx      = 5'(longint'(cand_q) - INT_BLKS);
  end

  logic is_meta, buf_hit;
  assign is_meta = longint'(cand_q) < META_BLKS;
  assign buf_hit = ibuf_v_q[set_q] && ibuf_addr_q[set_q] == widx_addr;

  // Prefetch candidate: the FIFO pointer of set pf_set_q.
  btag_t pf_slot;
  logic  pf_need;
  assign pf_slot = fifo_q[pf_set_q];
  assign pf_need = longint'(pf_slot) < META_BLKS &&
                   !(ibuf_v_q[pf_set_q] && ibuf_addr_q[pf_set_q] == idx_word_addr(pf_set_q, pf_slot));

  assign req_ready    = (state_q == S_IDLE);
  assign md_req_valid = (state_q == S_RD) || (state_q == S_PF_RD);
  assign md_addr      = widx_addr;
  assign pf_busy      = (state_q == S_PF_RD) || (state_q == S_PF_WAIT);

  function automatic btag_t next_slot(input btag_t s);
    return (longint'(s) == longint'(FAST_PER_SET) - 1) ? btag_t'(INT_BLKS) : s + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      set_q       <= '0;
      cand_q      <= '0;
      for (int k = 0; k < NSETS; k++) fifo_q[k] <= btag_t'(INT_BLKS);
      for (int k = 0; k < NSETS; k++) begin
        ibuf_v_q[k]    <= 1'b0;
        ibuf_addr_q[k] <= '0;
        ibuf_q[k]      <= '0;
      end
      pf_set_q    <= '0;
      prefetch    <= 1'b0;
      done        <= 1'b0;
      skip        <= 1'b0;
      victim      <= '0;
    end else begin
      done <= 1'b0;
      skip <= 1'b0;
      prefetch <= 1'b0;
      for (int k = 0; k < NSETS; k++)
        if (snoop_we && ibuf_v_q[k] && snoop_addr == ibuf_addr_q[k]) ibuf_q[k] <= snoop_wdata;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          set_q           <= req_set;
          cand_q          <= fifo_q[req_set];
          fifo_q[req_set] <= next_slot(fifo_q[req_set]);
          state_q         <= S_CHECK;
        end else if (pf_allow && pf_need) begin
          set_q    <= pf_set_q;
          cand_q   <= pf_slot;
          state_q  <= S_PF_RD;
        end else begin
          pf_set_q <= (longint'(pf_set_q) == longint'(NSETS) - 1) ? '0 : pf_set_q + 1'b1;
        end
        S_CHECK: begin
          if (!is_meta || (buf_hit && !ibuf_q[set_q][bidx])) begin
            victim  <= cand_q;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else if (buf_hit) begin
            // metadata block in use: skip it
            skip          <= 1'b1;
            cand_q        <= fifo_q[set_q];
            fifo_q[set_q] <= next_slot(fifo_q[set_q]);
          end else begin
            state_q <= S_RD;
          end
        end
        S_RD: if (md_req_ready) state_q <= S_WAIT;
        S_WAIT: if (md_rsp_valid) begin
          ibuf_v_q[set_q]    <= 1'b1;
          ibuf_addr_q[set_q] <= widx_addr;
          ibuf_q[set_q]      <= md_rdata;
          state_q            <= S_CHECK;
        end
        S_PF_RD: if (md_req_ready) state_q <= S_PF_WAIT;
        S_PF_WAIT: if (md_rsp_valid) begin
          ibuf_v_q[set_q]    <= 1'b1;
          ibuf_addr_q[set_q] <= widx_addr;
          ibuf_q[set_q]      <= md_rdata;
          prefetch           <= 1'b1;
          state_q            <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
