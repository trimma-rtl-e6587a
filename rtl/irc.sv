// irc: identity-mapping-aware remap cache (iRC).
//
// The on-chip remap cache is split into a NonIdCache, which holds valid remap
// entries (physical block -> remapped block tag), and an IdCache, which holds one
// bit per block of a 32-block super-block marking blocks whose mapping is the
// identity. Both parts are searched in parallel for every lookup; at most one of
// them can hit. A NonIdCache hit gives the remapped tag, an IdCache hit means the
// device address equals the physical address, and a miss in both sends the
// controller to the in-memory remap table. The result of that table walk is
// filled back here: a valid entry into the NonIdCache (IRC_FILL_NONID), an absent
// one into the IdCache (IRC_FILL_ID). When the table is updated the controller
// invalidates the address in both parts (IRC_INVAL).
//
// Sizes follow the paper (2048x6 NonIdCache, 256x16 IdCache, together 64 kB of
// 4-byte payloads). The lookup latency LAT is this design's choice: the paper
// gives 3 cycles for a conventional remap cache and no figure for the split one,
// so the same 3 cycles are used. rsp_valid pulses exactly LAT cycles after an
// IRC_LOOKUP request; fills and invalidations take effect at the next edge.
// ready is low while the two parts clear their SRAM rows after reset.
module irc
  import trimma_pkg::*;
#(
  parameter int unsigned NONID_SETS = 2048,
  parameter int unsigned NONID_WAYS = 6,
  parameter int unsigned ID_SETS    = 256,
  parameter int unsigned ID_WAYS    = 16,
  parameter int unsigned LAT        = 3
) (
  input  logic       clk,
  input  logic       rst_n,
  output logic       ready,
  input  logic       req_valid,
  input  logic [1:0] req_op,
  input  addr_t      req_addr,
  input  btag_t      fill_ptr,
  output logic       rsp_valid,
  output logic       rsp_nonid_hit,
  output logic       rsp_id_hit,
  output btag_t      rsp_ptr
);
  localparam logic [1:0] IRC_LOOKUP     = 2'd0;
  localparam logic [1:0] IRC_FILL_NONID = 2'd1;
  localparam logic [1:0] IRC_FILL_ID    = 2'd2;
  localparam logic [1:0] IRC_INVAL      = 2'd3;

  logic       n_valid, i_valid;
  logic [1:0] n_op, i_op;

  // Map the iRC operation onto the two parts.
  always_comb begin
    n_valid = 1'b0; n_op = 2'd0;
    i_valid = 1'b0; i_op = 2'd0;
    if (req_valid) begin
      unique case (req_op)
        IRC_LOOKUP:     begin n_valid = 1'b1; n_op = 2'd0; i_valid = 1'b1; i_op = 2'd0; end
        IRC_FILL_NONID: begin n_valid = 1'b1; n_op = 2'd1; i_valid = 1'b1; i_op = 2'd2; end
        IRC_FILL_ID:    begin n_valid = 1'b1; n_op = 2'd2; i_valid = 1'b1; i_op = 2'd1; end
        IRC_INVAL:      begin n_valid = 1'b1; n_op = 2'd2; i_valid = 1'b1; i_op = 2'd2; end
      endcase
    end
  end

  logic  n_rsp_valid, n_hit, i_rsp_valid, i_hit, n_ready, i_ready;
  btag_t n_ptr;

  nonid_cache #(.SETS(NONID_SETS), .WAYS(NONID_WAYS)) u_nonid (
    .clk, .rst_n, .ready(n_ready),
    .req_valid(n_valid), .req_op(n_op), .req_addr, .fill_ptr,
    .rsp_valid(n_rsp_valid), .rsp_hit(n_hit), .rsp_ptr(n_ptr)
  );

  id_cache #(.SETS(ID_SETS), .WAYS(ID_WAYS)) u_id (
    .clk, .rst_n, .ready(i_ready),
    .req_valid(i_valid), .req_op(i_op), .req_addr,
    .rsp_valid(i_rsp_valid), .rsp_hit(i_hit)
  );

  assign ready = n_ready && i_ready;

  // Pad the one-cycle SRAM lookup to LAT cycles.
  typedef struct packed {
    logic  v;
    logic  nh;
    logic  ih;
    btag_t p;
  } stage_t;

  stage_t pipe_q [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_q[i] <= '0;
    end else begin
      pipe_q[0] <= '{v: n_rsp_valid, nh: n_hit, ih: i_hit, p: n_ptr};
      for (int i = 1; i < LAT; i++) pipe_q[i] <= pipe_q[i-1];
    end
  end

  // stage 0 is loaded one cycle after the SRAM result, so the output taps
  // stage LAT-2 (LAT >= 2) or the SRAM result directly (LAT == 1).
  if (LAT == 1) begin : g_lat1
    assign rsp_valid     = n_rsp_valid;
    assign rsp_nonid_hit = n_hit;
    assign rsp_id_hit    = i_hit;
    assign rsp_ptr       = n_ptr;
  end else begin : g_latn
    assign rsp_valid     = pipe_q[LAT-2].v;
    assign rsp_nonid_hit = pipe_q[LAT-2].nh;
    assign rsp_id_hit    = pipe_q[LAT-2].ih;
    assign rsp_ptr       = pipe_q[LAT-2].p;
  end

  // A block is either remapped or identity-mapped, never both.
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    n_rsp_valid |-> !(n_hit && i_hit));
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    n_rsp_valid == i_rsp_valid);

endmodule
