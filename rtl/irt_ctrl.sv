// irt_ctrl: engine for the indirection-based remap table (iRT).
//
// Each set has its own two-level radix table stored in that set's metadata area
// of fast memory. A per-set block tag t (the address bits above the set index)
// has its 4-byte remap entry in leaf block t>>6, word t&63. Leaf block L is
// allocated when bit L of the set's index bit vector is 1; the vector holds one
// bit per leaf block, 2048 per 256 B index block (11-bit tag chunk). Because the
// whole tree is linearised at fixed addresses, every entry's location is a pure
// function of (set, tag): no pointers are stored and both levels are read in
// parallel. Fast slot numbering inside a set (this design's choice, following the
// left-to-right order of Fig 4): slots [0, INT_BLKS) are index blocks, slots
// [INT_BLKS, META_BLKS) are leaf blocks, the rest is cache/flat area. Fast slot
// s of set k is fast-memory block s*NSETS + k.
//
// Operations (cmd_valid while cmd_ready, one at a time; done pulses at the end):
//   IRT_LOOKUP  read index word and leaf entry back to back; rsp_leaf is the
//               index bit, rsp_entry the entry (forced invalid if the leaf is
//               absent, since an unallocated leaf block may hold cached data).
//   IRT_WRITE   write cmd_entry to tag's slot (leaf must already be allocated).
//   IRT_CLEAR   write an invalid entry, then read the 64 entries of the leaf; if
//               none is valid, clear the index bit (rsp_freed = 1).
//   IRT_ALLOC   zero the 64 entries of tag's leaf block, then set its index bit.
// The index word read by the last lookup is kept on chip (the paper buffers the
// intermediate level during a lookup) and reused by a later update of the same
// word, so an update after a lookup needs no second read. The valid/dirty bits in
// an entry and the scan used to detect an empty leaf are this design's choices.
//
// Metadata port: in-order, word granular. Writes are posted; each read returns
// one md_rsp_valid with md_rdata, in request order.
module irt_ctrl
  import trimma_pkg::*;
#(
  parameter int unsigned NSETS        = 4,
  parameter int unsigned FAST_PER_SET = 655360,
  parameter int unsigned SLOW_PER_SET = 20971520
) (
  input  logic    clk,
  input  logic    rst_n,
  // command
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  irt_op_e cmd_op,
  input  logic [$clog2(NSETS > 1 ? NSETS : 2)-1:0] cmd_set,
  input  btag_t   cmd_tag,
  input  entry_t  cmd_entry,
  output logic    done,
  output entry_t  rsp_entry,
  output logic    rsp_leaf,
  output logic    rsp_freed,
  // metadata port to fast memory
  output logic    md_req_valid,
  input  logic    md_req_ready,
  output logic    md_we,
  output addr_t   md_addr,
  output word_t   md_wdata,
  input  logic    md_rsp_valid,
  input  word_t   md_rdata
);
  localparam int unsigned SET_W     = $clog2(NSETS > 1 ? NSETS : 2);
  localparam longint unsigned TOTAL = longint'(FAST_PER_SET) + longint'(SLOW_PER_SET);
  localparam longint unsigned LEAF_BLKS = (TOTAL + longint'(WORDS_PER_BLK) - 1) / longint'(WORDS_PER_BLK);
  localparam longint unsigned INT_BLKS  = (LEAF_BLKS + (1 << IDXBIT_W) - 1) >> IDXBIT_W;

  initial assert (INT_BLKS + LEAF_BLKS <= longint'(FAST_PER_SET))
    else $error("iRT does not fit in the fast memory of a set");

  // Byte address of word w of fast slot s in set k.
  function automatic addr_t slot_addr(input logic [SET_W-1:0] k, input longint unsigned s,
                                      input longint unsigned w);
    longint unsigned blk;
    blk = s * NSETS + longint'(k);
    return addr_t'((blk << OFF_W) + (w << 2));
  endfunction

  function automatic addr_t leaf_word_addr(input logic [SET_W-1:0] k, input btag_t t);
    return slot_addr(k, INT_BLKS + (longint'(t) >> ENT_IDX_W), longint'(t[ENT_IDX_W-1:0]));
  endfunction

  function automatic addr_t index_word_addr(input logic [SET_W-1:0] k, input btag_t t);
    longint unsigned leaf;
    leaf = longint'(t) >> ENT_IDX_W;
    return slot_addr(k, leaf >> IDXBIT_W, (leaf >> 5) & (longint'(WORDS_PER_BLK) - 1));
  endfunction

  typedef enum logic [3:0] {
    S_IDLE, S_LK_IDX, S_LK_LEAF, S_LK_WAIT,
    S_WR, S_CL_WR, S_CL_SCAN, S_ZERO,
    S_RMW_RD, S_RMW_WAIT, S_RMW_WR, S_DONE
  } state_e;

  state_e  state_q;
  logic [SET_W-1:0] set_q;
  btag_t   tag_q;
  entry_t  ent_q;
  logic [6:0] issue_q, rcv_q;     // 0..64 counters for scans / zeroing
  logic    any_valid_q;
  logic    first_q;               // lookup: next response is the index word
  logic    new_bit_q;             // value written into the index bit
  // on-chip copy of one index word
  logic    ibuf_v_q;
  addr_t   ibuf_addr_q;
  word_t   ibuf_q;

  logic [4:0] bit_idx;
  addr_t      idx_addr, leaf_addr;
  assign bit_idx   = tag_q[ENT_IDX_W +: 5];
  assign idx_addr  = index_word_addr(set_q, tag_q);
  assign leaf_addr = leaf_word_addr(set_q, tag_q);

  assign cmd_ready = (state_q == S_IDLE);

  // Request generation.
  always_comb begin
    md_req_valid = 1'b0;
    md_we        = 1'b0;
    md_addr      = '0;
    md_wdata     = '0;
    unique case (state_q)
      S_LK_IDX:  begin md_req_valid = 1'b1; md_addr = idx_addr; end
      S_LK_LEAF: begin md_req_valid = 1'b1; md_addr = leaf_addr; end
      S_WR:      begin md_req_valid = 1'b1; md_we = 1'b1; md_addr = leaf_addr; md_wdata = ent_q; end
      S_CL_WR:   begin md_req_valid = 1'b1; md_we = 1'b1; md_addr = leaf_addr; md_wdata = '0; end
      S_CL_SCAN: begin
        md_req_valid = (issue_q < 7'd64);
        md_addr      = slot_addr(set_q, INT_BLKS + (longint'(tag_q) >> ENT_IDX_W), longint'(issue_q[5:0]));
      end
      S_ZERO: begin
        md_req_valid = 1'b1; md_we = 1'b1;
        md_addr      = slot_addr(set_q, INT_BLKS + (longint'(tag_q) >> ENT_IDX_W), longint'(issue_q[5:0]));
      end
      S_RMW_RD: begin md_req_valid = 1'b1; md_addr = idx_addr; end
      S_RMW_WR: begin
        md_req_valid = 1'b1; md_we = 1'b1; md_addr = idx_addr;
        md_wdata     = ibuf_q;
        md_wdata[bit_idx] = new_bit_q;
      end
      default: ;
    endcase
  end

  logic fire;
  assign fire = md_req_valid && md_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      set_q       <= '0;
      tag_q       <= '0;
      ent_q       <= '0;
      issue_q     <= '0;
      rcv_q       <= '0;
      any_valid_q <= 1'b0;
      first_q     <= 1'b0;
      new_bit_q   <= 1'b0;
      ibuf_v_q    <= 1'b0;
      ibuf_addr_q <= '0;
      ibuf_q      <= '0;
      done        <= 1'b0;
      rsp_entry   <= '0;
      rsp_leaf    <= 1'b0;
      rsp_freed   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid) begin
          set_q     <= cmd_set;
          tag_q     <= cmd_tag;
          ent_q     <= cmd_entry;
          issue_q   <= '0;
          rcv_q     <= '0;
          rsp_freed <= 1'b0;
          unique case (cmd_op)
            IRT_LOOKUP: state_q <= S_LK_IDX;
            IRT_WRITE:  state_q <= S_WR;
            IRT_CLEAR:  state_q <= S_CL_WR;
            IRT_ALLOC:  state_q <= S_ZERO;
          endcase
        end
        // ---- lookup: both levels issued back to back, answered in order
        S_LK_IDX:  if (fire) begin first_q <= 1'b1; state_q <= S_LK_LEAF; end
        S_LK_LEAF, S_LK_WAIT: begin
          if (state_q == S_LK_LEAF && fire) state_q <= S_LK_WAIT;
          if (md_rsp_valid) begin
            if (first_q) begin
              first_q     <= 1'b0;
              ibuf_v_q    <= 1'b1;
              ibuf_addr_q <= idx_addr;
              ibuf_q      <= md_rdata;
              rsp_leaf    <= md_rdata[bit_idx];
            end else begin
              rsp_entry <= rsp_leaf ? entry_t'(md_rdata) : '0;
              state_q   <= S_DONE;
            end
          end
        end
        // ---- entry write
        S_WR: if (fire) state_q <= S_DONE;
        // ---- entry clear, then check whether the leaf became empty
        S_CL_WR: if (fire) begin
          any_valid_q <= 1'b0;
          state_q     <= S_CL_SCAN;
        end
        S_CL_SCAN: begin
          if (fire) issue_q <= issue_q + 1'b1;
          if (md_rsp_valid) begin
            rcv_q <= rcv_q + 1'b1;
            if (md_rdata[31]) any_valid_q <= 1'b1;
            if (rcv_q == 7'd63) begin
              if (any_valid_q || md_rdata[31]) state_q <= S_DONE;
              else begin
                new_bit_q <= 1'b0;
                rsp_freed <= 1'b1;
                state_q   <= (ibuf_v_q && ibuf_addr_q == idx_addr) ? S_RMW_WR : S_RMW_RD;
              end
            end
          end
        end
        // ---- allocation: zero the leaf, then set its index bit
        S_ZERO: if (fire) begin
          issue_q <= issue_q + 1'b1;
          if (issue_q == 7'd63) begin
            new_bit_q <= 1'b1;
            state_q   <= (ibuf_v_q && ibuf_addr_q == idx_addr) ? S_RMW_WR : S_RMW_RD;
          end
        end
        // ---- index word read-modify-write
        S_RMW_RD: if (fire) state_q <= S_RMW_WAIT;
        S_RMW_WAIT: if (md_rsp_valid) begin
          ibuf_v_q    <= 1'b1;
          ibuf_addr_q <= idx_addr;
          ibuf_q      <= md_rdata;
          state_q     <= S_RMW_WR;
        end
        S_RMW_WR: if (fire) begin
          ibuf_q[bit_idx] <= new_bit_q;
          state_q         <= S_DONE;
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // An entry may only be written into an allocated leaf.
  a_write_needs_leaf: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_WR && ibuf_v_q && ibuf_addr_q == idx_addr) |-> ibuf_q[bit_idx]);

endmodule
