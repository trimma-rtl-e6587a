// trimma_ctrl: Trimma hybrid-memory metadata controller (top level).
//
// Sits in the memory controller between the last-level cache and the two memory
// tiers. Memory is divided into NSETS sets; inside a set every 256 B block has a
// per-set tag, and the fast blocks of a set are numbered first:
//   [0, INT_BLKS)               iRT index blocks (always metadata)
//   [INT_BLKS, META_BLKS)       iRT leaf blocks; extra cache slots while unused
//   [META_BLKS, FAST-FLAT)      cache area
//   [FAST-FLAT, FAST)           fast flat area (software visible)
//   [FAST, FAST+SLOW)           slow memory (software visible)
// A physical address is {tag, set, offset}; a device address has the same form,
// and a tag below FAST_PER_SET lives in fast memory. The remap table maps a
// physical tag to the tag that holds its data; absence means identity. When a
// slow block b is placed in fast slot f both entry[b] = f and the inverse
// entry[f] = b are written, so the owner of a slot is found at eviction.
//
// Access flow (Fig 3 of the paper, steps 1-4):
//  1. Look up the iRC; on a miss in both parts walk the iRT and fill the iRC.
//  2. Access the data at the device address and answer the requester.
//  3. Off the critical path, if the data came from slow memory: restore a
//     displaced flat block, or pick a FIFO victim slot (victim_sel), evict its
//     occupant (write back if dirty, swap back if it is a flat slot) and bring
//     the block in (copy into a cache/metadata slot, swap with a flat slot).
//  4. Update the iRT: allocate leaf blocks as needed (evicting any data cached
//     in the claimed block, since metadata has priority), write both entries,
//     free leaves that become empty, and invalidate the touched iRC entries.
// Fast-memory writes to a cached block set the dirty bit of its inverse entry.
// While the iRT engine is idle, victim_sel may use the metadata port to
// prefetch the index bits its FIFO pointers will need next.
//
// Choices of this design: requests are handled one at a time and the next one
// is accepted only after step 4 (the response is still returned before step 3);
// every slow-memory access migrates its block; a victim is rejected when filling
// it would require allocating the leaf block that lives in that same slot; on
// reset the index blocks of all sets are zeroed, and the iRC SRAMs cleared,
// before the first request is accepted (init_done).
//
// In the default cache mode (FLAT_PER_SET = 0) the swap-related outputs (the
// MIG_SWAP code of mig_op, the swap_back event) can never be active, and the
// low bits of block and word addresses are always zero, so synthesis sees a few
// constant output bits; they are kept so that one port list serves both modes.
//
// Ports: requester (req_*/rsp_*), data access (dat_*), block moves (mig_*),
// metadata in fast memory (md_*), all valid/ready with in-order responses; reads
// on dat_ and md_ must answer at least one cycle after the request.
module trimma_ctrl
  import trimma_pkg::*;
#(
  parameter int unsigned NSETS        = 4,
  parameter int unsigned FAST_PER_SET = 655360,
  parameter int unsigned SLOW_PER_SET = 20971520,
  parameter int unsigned FLAT_PER_SET = 0,
  parameter int unsigned NONID_SETS   = 2048,
  parameter int unsigned NONID_WAYS   = 6,
  parameter int unsigned ID_SETS      = 256,
  parameter int unsigned ID_WAYS      = 16,
  parameter int unsigned IRC_LAT      = 3
) (
  input  logic    clk,
  input  logic    rst_n,
  output logic    init_done,
  // requester (last-level cache)
  input  logic    req_valid,
  output logic    req_ready,
  input  addr_t   req_addr,
  input  logic    req_we,
  input  word_t   req_wdata,
  output logic    rsp_valid,
  output word_t   rsp_rdata,
  // demand data access
  output logic    dat_req_valid,
  input  logic    dat_req_ready,
  output logic    dat_fast,
  output logic    dat_we,
  output addr_t   dat_addr,
  output word_t   dat_wdata,
  input  logic    dat_rsp_valid,
  input  word_t   dat_rdata,
  // block moves between the tiers
  output logic    mig_req_valid,
  input  logic    mig_req_ready,
  output mig_op_e mig_op,
  output addr_t   mig_fast_addr,
  output addr_t   mig_slow_addr,
  input  logic    mig_done,
  // metadata in fast memory
  output logic    md_req_valid,
  input  logic    md_req_ready,
  output logic    md_we,
  output addr_t   md_addr,
  output word_t   md_wdata,
  input  logic    md_rsp_valid,
  input  word_t   md_rdata,
  // mechanism pulses
  output events_t events
);
  localparam int unsigned SET_W     = $clog2(NSETS > 1 ? NSETS : 2);
  localparam longint unsigned TOTAL = longint'(FAST_PER_SET) + longint'(SLOW_PER_SET);
  localparam longint unsigned LEAF_BLKS = (TOTAL + longint'(WORDS_PER_BLK) - 1) / longint'(WORDS_PER_BLK);
  localparam longint unsigned INT_BLKS  = (LEAF_BLKS + (1 << IDXBIT_W) - 1) >> IDXBIT_W;
  localparam longint unsigned META_BLKS = INT_BLKS + LEAF_BLKS;
  localparam longint unsigned FLAT_LO   = longint'(FAST_PER_SET) - longint'(FLAT_PER_SET);

  initial assert (META_BLKS + longint'(FLAT_PER_SET) < longint'(FAST_PER_SET))
    else $error("no cache area left after the iRT and the flat area");

  localparam logic [1:0] IRC_LOOKUP     = 2'd0;
  localparam logic [1:0] IRC_FILL_NONID = 2'd1;
  localparam logic [1:0] IRC_FILL_ID    = 2'd2;
  localparam logic [1:0] IRC_INVAL      = 2'd3;

  typedef enum logic [5:0] {
    S_INIT, S_IDLE, S_IRC_LK, S_IRC_WAIT, S_IRT_LK, S_IRT_WAIT, S_IRC_FILL,
    S_DATA, S_DATA_WAIT, S_RESP, S_DIRTY, S_DIRTY_WAIT,
    S_VIC_REQ, S_VIC_WAIT, S_FILL, S_FILL_WAIT,
    S_WR_P, S_WR_P_WAIT, S_INV_P, S_WR_V, S_WR_V_WAIT, S_INV_V,
    // evict the occupant of slot ev_slot_q, then go to ev_ret_q
    S_EV_LK, S_EV_LK_WAIT, S_EV_MIG, S_EV_MIG_WAIT, S_EV_CLR_D, S_EV_CLR_D_WAIT,
    S_EV_INV_D, S_EV_CLR_M, S_EV_CLR_M_WAIT, S_EV_INV_M,
    // make sure the leaf holding el_tag_q's entry exists, then go to el_ret_q
    S_EL_LK, S_EL_LK_WAIT, S_EL_ALLOC, S_EL_ALLOC_WAIT
  } state_e;

  state_e state_q, ev_ret_q, el_ret_q;

  // ---------------------------------------------------------------- request
  logic [SET_W-1:0] set_q;
  btag_t  p_q, dev_q, v_q, ev_slot_q, ev_d_q, el_tag_q;
  logic   we_q, remapped_q, ev_from_alloc_q;
  word_t  wdata_q;
  logic [OFF_W-1:0] off_q;

  function automatic addr_t phys_addr(input logic [SET_W-1:0] k, input btag_t t);
    return addr_t'(((longint'(t) * NSETS) + longint'(k)) << OFF_W);
  endfunction
  function automatic addr_t fast_blk_addr(input logic [SET_W-1:0] k, input btag_t t);
    return addr_t'(((longint'(t) * NSETS) + longint'(k)) << OFF_W);
  endfunction
  function automatic addr_t slow_blk_addr(input logic [SET_W-1:0] k, input btag_t t);
    return addr_t'((((longint'(t) - longint'(FAST_PER_SET)) * NSETS) + longint'(k)) << OFF_W);
  endfunction
  function automatic logic is_fast(input btag_t t);
    return longint'(t) < longint'(FAST_PER_SET);
  endfunction
  function automatic logic is_flat_slot(input btag_t t);
    return longint'(t) >= FLAT_LO && longint'(t) < longint'(FAST_PER_SET);
  endfunction
  function automatic btag_t leaf_slot(input btag_t t);
    return btag_t'(INT_BLKS + (longint'(t) >> ENT_IDX_W));
  endfunction

  // ---------------------------------------------------------------- iRC
  logic       irc_req_valid;
  logic [1:0] irc_req_op;
  addr_t      irc_req_addr;
  btag_t      irc_fill_ptr;
  logic       irc_ready, irc_rsp_valid, irc_nonid_hit, irc_id_hit;
  btag_t      irc_rsp_ptr;

  irc #(.NONID_SETS(NONID_SETS), .NONID_WAYS(NONID_WAYS), .ID_SETS(ID_SETS),
        .ID_WAYS(ID_WAYS), .LAT(IRC_LAT)) u_irc (
    .clk, .rst_n, .ready(irc_ready),
    .req_valid(irc_req_valid), .req_op(irc_req_op), .req_addr(irc_req_addr),
    .fill_ptr(irc_fill_ptr),
    .rsp_valid(irc_rsp_valid), .rsp_nonid_hit(irc_nonid_hit),
    .rsp_id_hit(irc_id_hit), .rsp_ptr(irc_rsp_ptr)
  );

  // ---------------------------------------------------------------- iRT
  logic    irt_cmd_valid, irt_cmd_ready, irt_done, irt_leaf, irt_freed;
  irt_op_e irt_cmd_op;
  btag_t   irt_cmd_tag;
  entry_t  irt_cmd_entry, irt_entry;
  logic    irt_md_req_valid, irt_md_req_ready, irt_md_we, irt_md_rsp_valid;
  addr_t   irt_md_addr;
  word_t   irt_md_wdata;

  irt_ctrl #(.NSETS(NSETS), .FAST_PER_SET(FAST_PER_SET), .SLOW_PER_SET(SLOW_PER_SET)) u_irt (
    .clk, .rst_n,
    .cmd_valid(irt_cmd_valid), .cmd_ready(irt_cmd_ready), .cmd_op(irt_cmd_op),
    .cmd_set(set_q), .cmd_tag(irt_cmd_tag), .cmd_entry(irt_cmd_entry),
    .done(irt_done), .rsp_entry(irt_entry), .rsp_leaf(irt_leaf), .rsp_freed(irt_freed),
    .md_req_valid(irt_md_req_valid), .md_req_ready(irt_md_req_ready), .md_we(irt_md_we),
    .md_addr(irt_md_addr), .md_wdata(irt_md_wdata),
    .md_rsp_valid(irt_md_rsp_valid), .md_rdata
  );

  // ---------------------------------------------------------------- victims
  logic  vs_req_valid, vs_req_ready, vs_done, vs_skip, vs_pf_allow, vs_pf_busy, vs_prefetch;
  btag_t vs_victim;
  logic  vs_md_req_valid, vs_md_req_ready, vs_md_rsp_valid;
  addr_t vs_md_addr;

  victim_sel #(.NSETS(NSETS), .FAST_PER_SET(FAST_PER_SET), .SLOW_PER_SET(SLOW_PER_SET)) u_vs (
    .clk, .rst_n,
    .req_valid(vs_req_valid), .req_ready(vs_req_ready), .req_set(set_q),
    .done(vs_done), .victim(vs_victim), .skip(vs_skip),
    .md_req_valid(vs_md_req_valid), .md_req_ready(vs_md_req_ready), .md_addr(vs_md_addr),
    .md_rsp_valid(vs_md_rsp_valid), .md_rdata,
    .pf_allow(vs_pf_allow), .pf_busy(vs_pf_busy), .prefetch(vs_prefetch),
    .snoop_we(md_req_valid && md_req_ready && md_we), .snoop_addr(md_addr), .snoop_wdata(md_wdata)
  );

  // ---------------------------------------------------------------- init
  logic [SET_W-1:0] init_set_q;
  longint unsigned  init_slot_q;
  logic [5:0]       init_word_q;

  // ---------------------------------------------------------------- md mux
  // Only one unit owns the metadata port at a time: the init sequencer, the
  // victim selector while a victim is being chosen or an index-bit prefetch is in
  // flight, otherwise the iRT engine. A prefetch may start only while the iRT
  // engine is idle (it then has no read outstanding) and is not being started.
  logic vs_owns;
  assign vs_owns     = (state_q == S_VIC_WAIT) || vs_pf_busy;
  assign vs_pf_allow = irt_cmd_ready && !irt_cmd_valid && state_q != S_INIT &&
                       state_q != S_VIC_REQ && state_q != S_VIC_WAIT;

  always_comb begin
    if (state_q == S_INIT) begin
      md_req_valid = 1'b1;
      md_we        = 1'b1;
      md_addr      = addr_t'(((init_slot_q * NSETS + longint'(init_set_q)) << OFF_W)
                             + (longint'(init_word_q) << 2));
      md_wdata     = '0;
    end else if (vs_owns) begin
      md_req_valid = vs_md_req_valid;
      md_we        = 1'b0;
      md_addr      = vs_md_addr;
      md_wdata     = '0;
    end else begin
      md_req_valid = irt_md_req_valid;
      md_we        = irt_md_we;
      md_addr      = irt_md_addr;
      md_wdata     = irt_md_wdata;
    end
  end
  assign irt_md_req_ready = md_req_ready && !vs_owns && state_q != S_INIT;
  assign vs_md_req_ready  = md_req_ready && vs_owns;
  assign irt_md_rsp_valid = md_rsp_valid && !vs_owns;
  assign vs_md_rsp_valid  = md_rsp_valid && vs_owns;

  // ---------------------------------------------------------------- control
  assign init_done = (state_q != S_INIT) && irc_ready;
  assign req_ready = (state_q == S_IDLE) && irc_ready;

  always_comb begin
    irc_req_valid = 1'b0;
    irc_req_op    = IRC_LOOKUP;
    irc_req_addr  = phys_addr(set_q, p_q);
    irc_fill_ptr  = dev_q;
    irt_cmd_valid = 1'b0;
    irt_cmd_op    = IRT_LOOKUP;
    irt_cmd_tag   = p_q;
    irt_cmd_entry = '0;
    vs_req_valid  = 1'b0;
    dat_req_valid = 1'b0;
    dat_fast      = is_fast(dev_q);
    dat_we        = we_q;
    dat_addr      = (is_fast(dev_q) ? fast_blk_addr(set_q, dev_q) : slow_blk_addr(set_q, dev_q))
                    | addr_t'(off_q);
    dat_wdata     = wdata_q;
    mig_req_valid = 1'b0;
    mig_op        = MIG_FILL;
    mig_fast_addr = fast_blk_addr(set_q, v_q);
    mig_slow_addr = slow_blk_addr(set_q, p_q);
    unique case (state_q)
      S_IRC_LK:   irc_req_valid = 1'b1;
      S_IRT_LK:   irt_cmd_valid = 1'b1;
      S_IRC_FILL: begin
        irc_req_valid = 1'b1;
        irc_req_op    = remapped_q ? IRC_FILL_NONID : IRC_FILL_ID;
      end
      S_DATA:     dat_req_valid = 1'b1;
      S_DIRTY: begin
        irt_cmd_valid = 1'b1;
        irt_cmd_op    = IRT_WRITE;
        irt_cmd_tag   = dev_q;
        irt_cmd_entry = '{valid: 1'b1, dirty: 1'b1, ptr: p_q};
      end
      S_VIC_REQ:  vs_req_valid = 1'b1;
      S_FILL: begin
        mig_req_valid = 1'b1;
        mig_op        = is_flat_slot(v_q) ? MIG_SWAP : MIG_FILL;
      end
      S_WR_P: begin
        irt_cmd_valid = 1'b1;
        irt_cmd_op    = IRT_WRITE;
        irt_cmd_entry = '{valid: 1'b1, dirty: 1'b0, ptr: v_q};
      end
      S_INV_P: begin irc_req_valid = 1'b1; irc_req_op = IRC_INVAL; end
      S_WR_V: begin
        irt_cmd_valid = 1'b1;
        irt_cmd_op    = IRT_WRITE;
        irt_cmd_tag   = v_q;
        irt_cmd_entry = '{valid: 1'b1, dirty: 1'b0, ptr: p_q};
      end
      S_INV_V: begin
        irc_req_valid = 1'b1; irc_req_op = IRC_INVAL;
        irc_req_addr  = phys_addr(set_q, v_q);
      end
      S_EV_LK:    begin irt_cmd_valid = 1'b1; irt_cmd_tag = ev_slot_q; end
      S_EV_MIG: begin
        mig_req_valid = 1'b1;
        mig_op        = is_flat_slot(ev_slot_q) ? MIG_SWAP : MIG_WRITEBACK;
        mig_fast_addr = fast_blk_addr(set_q, ev_slot_q);
        mig_slow_addr = slow_blk_addr(set_q, ev_d_q);
      end
      S_EV_CLR_D: begin irt_cmd_valid = 1'b1; irt_cmd_op = IRT_CLEAR; irt_cmd_tag = ev_d_q; end
      S_EV_INV_D: begin
        irc_req_valid = 1'b1; irc_req_op = IRC_INVAL;
        irc_req_addr  = phys_addr(set_q, ev_d_q);
      end
      S_EV_CLR_M: begin irt_cmd_valid = 1'b1; irt_cmd_op = IRT_CLEAR; irt_cmd_tag = ev_slot_q; end
      S_EV_INV_M: begin
        irc_req_valid = 1'b1; irc_req_op = IRC_INVAL;
        irc_req_addr  = phys_addr(set_q, ev_slot_q);
      end
      S_EL_LK:    begin irt_cmd_valid = 1'b1; irt_cmd_tag = el_tag_q; end
      S_EL_ALLOC: begin irt_cmd_valid = 1'b1; irt_cmd_op = IRT_ALLOC; irt_cmd_tag = el_tag_q; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= S_INIT;
      ev_ret_q        <= S_IDLE;
      el_ret_q        <= S_IDLE;
      set_q           <= '0;
      p_q             <= '0;
      dev_q           <= '0;
      v_q             <= '0;
      ev_slot_q       <= '0;
      ev_d_q          <= '0;
      el_tag_q        <= '0;
      we_q            <= 1'b0;
      remapped_q      <= 1'b0;
      ev_from_alloc_q <= 1'b0;
      wdata_q         <= '0;
      off_q           <= '0;
      init_set_q      <= '0;
      init_slot_q     <= '0;
      init_word_q     <= '0;
      rsp_valid       <= 1'b0;
      rsp_rdata       <= '0;
      events          <= '0;
    end else begin
      rsp_valid <= 1'b0;
      events    <= '0;
      events.victim_skip  <= vs_skip;
      events.idx_prefetch <= vs_prefetch;
      if (irt_done && irt_freed) events.leaf_free <= 1'b1;
      unique case (state_q)
        // zero every index block of every set
        S_INIT: if (md_req_ready) begin
          init_word_q <= init_word_q + 1'b1;
          if (init_word_q == 6'd63) begin
            if (init_slot_q == INT_BLKS - 1) begin
              init_slot_q <= '0;
              if (init_set_q == SET_W'(NSETS - 1)) state_q <= S_IDLE;
              else init_set_q <= init_set_q + 1'b1;
            end else begin
              init_slot_q <= init_slot_q + 1;
            end
          end
        end
        S_IDLE: if (req_valid && irc_ready) begin
          set_q      <= req_addr[OFF_W +: SET_W];
          p_q        <= btag_t'(req_addr >> (OFF_W + SET_W));
          off_q      <= req_addr[OFF_W-1:0];
          we_q       <= req_we;
          wdata_q    <= req_wdata;
          remapped_q <= 1'b0;
          state_q    <= S_IRC_LK;
        end
        // ---- step 1: locate the remapped address
        S_IRC_LK: state_q <= S_IRC_WAIT;
        S_IRC_WAIT: if (irc_rsp_valid) begin
          if (irc_nonid_hit) begin
            dev_q <= irc_rsp_ptr; remapped_q <= 1'b1; events.nonid_hit <= 1'b1;
            state_q <= S_DATA;
          end else if (irc_id_hit) begin
            dev_q <= p_q; events.id_hit <= 1'b1;
            state_q <= S_DATA;
          end else begin
            state_q <= S_IRT_LK;
          end
        end
        S_IRT_LK: if (irt_cmd_ready) state_q <= S_IRT_WAIT;
        S_IRT_WAIT: if (irt_done) begin
          events.irt_walk <= 1'b1;
          remapped_q      <= irt_entry.valid;
          dev_q           <= irt_entry.valid ? irt_entry.ptr : p_q;
          state_q         <= S_IRC_FILL;
        end
        S_IRC_FILL: state_q <= S_DATA;
        // ---- step 2: data access
        S_DATA: if (dat_req_ready) begin
          if (is_fast(dev_q)) events.fast_access <= 1'b1;
          else                events.slow_access <= 1'b1;
          state_q <= we_q ? S_RESP : S_DATA_WAIT;
        end
        S_DATA_WAIT: if (dat_rsp_valid) begin
          rsp_rdata <= dat_rdata;
          state_q   <= S_RESP;
        end
        S_RESP: begin
          rsp_valid <= 1'b1;
          if (is_fast(dev_q)) begin
            state_q <= (we_q && remapped_q && !is_flat_slot(dev_q)) ? S_DIRTY : S_IDLE;
          end else if (is_fast(p_q)) begin
            // a flat fast block currently swapped out: swap it back home
            ev_slot_q <= p_q;
            ev_ret_q  <= S_IDLE;
            state_q   <= S_EV_LK;
          end else begin
            state_q <= S_VIC_REQ;
          end
        end
        S_DIRTY: if (irt_cmd_ready) state_q <= S_DIRTY_WAIT;
        S_DIRTY_WAIT: if (irt_done) state_q <= S_IDLE;
        // ---- step 3: replacement
        S_VIC_REQ: if (vs_req_ready) state_q <= S_VIC_WAIT;
        S_VIC_WAIT: if (vs_done) begin
          if (longint'(vs_victim) < META_BLKS &&
              (vs_victim == leaf_slot(p_q) || vs_victim == leaf_slot(vs_victim))) begin
            state_q <= S_VIC_REQ;   // filling it would claim the slot for metadata
          end else begin
            v_q             <= vs_victim;
            ev_slot_q       <= vs_victim;
            ev_from_alloc_q <= 1'b0;
            ev_ret_q        <= S_FILL;
            state_q         <= S_EV_LK;
          end
        end
        S_FILL: if (mig_req_ready) state_q <= S_FILL_WAIT;
        S_FILL_WAIT: if (mig_done) begin
          events.migrate        <= 1'b1;
          events.meta_slot_used <= longint'(v_q) < META_BLKS;
          el_tag_q <= p_q;
          el_ret_q <= S_WR_P;
          state_q  <= S_EL_LK;
        end
        // ---- step 4: metadata update
        S_WR_P: if (irt_cmd_ready) state_q <= S_WR_P_WAIT;
        S_WR_P_WAIT: if (irt_done) state_q <= S_INV_P;
        S_INV_P: begin
          el_tag_q <= v_q;
          el_ret_q <= S_WR_V;
          state_q  <= S_EL_LK;
        end
        S_WR_V: if (irt_cmd_ready) state_q <= S_WR_V_WAIT;
        S_WR_V_WAIT: if (irt_done) state_q <= S_INV_V;
        S_INV_V: state_q <= S_IDLE;
        // ---- evict whatever occupies slot ev_slot_q
        S_EV_LK: if (irt_cmd_ready) state_q <= S_EV_LK_WAIT;
        S_EV_LK_WAIT: if (irt_done) begin
          if (!irt_entry.valid) state_q <= ev_ret_q;
          else begin
            ev_d_q     <= irt_entry.ptr;
            if (ev_from_alloc_q) events.meta_evict <= 1'b1;
            state_q <= (is_flat_slot(ev_slot_q) || irt_entry.dirty) ? S_EV_MIG : S_EV_CLR_D;
          end
        end
        S_EV_MIG: if (mig_req_ready) state_q <= S_EV_MIG_WAIT;
        S_EV_MIG_WAIT: if (mig_done) begin
          if (is_flat_slot(ev_slot_q)) events.swap_back <= 1'b1;
          else                         events.writeback <= 1'b1;
          state_q <= S_EV_CLR_D;
        end
        S_EV_CLR_D: if (irt_cmd_ready) state_q <= S_EV_CLR_D_WAIT;
        S_EV_CLR_D_WAIT: if (irt_done) state_q <= S_EV_INV_D;
        S_EV_INV_D: state_q <= S_EV_CLR_M;
        S_EV_CLR_M: if (irt_cmd_ready) state_q <= S_EV_CLR_M_WAIT;
        S_EV_CLR_M_WAIT: if (irt_done) state_q <= S_EV_INV_M;
        S_EV_INV_M: state_q <= ev_ret_q;
        // ---- allocate the leaf of el_tag_q if it is missing
        S_EL_LK: if (irt_cmd_ready) state_q <= S_EL_LK_WAIT;
        S_EL_LK_WAIT: if (irt_done) begin
          if (irt_leaf) state_q <= el_ret_q;
          else begin
            // metadata has priority: evict data cached in the leaf's block first
            ev_slot_q       <= leaf_slot(el_tag_q);
            ev_from_alloc_q <= 1'b1;
            ev_ret_q        <= S_EL_ALLOC;
            state_q         <= S_EV_LK;
          end
        end
        S_EL_ALLOC: if (irt_cmd_ready) state_q <= S_EL_ALLOC_WAIT;
        S_EL_ALLOC_WAIT: if (irt_done) begin
          events.leaf_alloc <= 1'b1;
          ev_from_alloc_q   <= 1'b0;
          state_q           <= el_ret_q;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Requests stay inside the software-visible space of the configuration.
  a_req_visible: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_IRC_LK) |-> (longint'(p_q) >= FLAT_LO && longint'(p_q) < TOTAL));
  // The victim selector only drives the metadata port while it owns it.
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
    vs_md_req_valid |-> vs_owns);

endmodule
