// tb_victim_sel: self-checking test of FIFO victim selection on a small
// configuration (2 sets, 256 fast + 4096 slow blocks per set, so slot 0 is the
// index block, slots 1..68 leaf blocks, 69..255 cache slots). Index bits are
// planted in the behavioural fast memory. Checks the victim order against a list
// computed here, skipping of leaf slots in use, wrap-around past the last slot,
// per-set pointers, that one index read serves 32 leaf slots, and that a snooped
// metadata write updates the on-chip index word. Finally, with prefetching
// allowed while idle, the index word the next victim request needs is fetched
// ahead of time, so that request makes no metadata read of its own.
module tb_victim_sel;
  import trimma_pkg::*;

  localparam int unsigned NSETS = 2, FAST = 256, SLOW = 4096;
  localparam int unsigned INT_BLKS = 1, META = 69;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  req_valid, req_ready, done, skip;
  logic [0:0] req_set;
  btag_t victim;
  logic  md_req_valid, md_req_ready, md_rsp_valid;
  addr_t md_addr;
  word_t md_rdata;
  logic  pf_allow, pf_busy, prefetch;
  logic  snoop_we;
  addr_t snoop_addr;
  word_t snoop_wdata;

  victim_sel #(.NSETS(NSETS), .FAST_PER_SET(FAST), .SLOW_PER_SET(SLOW)) dut (.*);

  logic dat_req_ready, dat_rsp_valid, mig_req_ready, mig_done;
  word_t dat_rdata;
  hybrid_mem_model #(.FAST_LAT(4)) mem (
    .clk, .rst_n,
    .md_req_valid, .md_req_ready, .md_we(1'b0), .md_addr, .md_wdata('0), .md_rsp_valid, .md_rdata,
    .dat_req_valid(1'b0), .dat_req_ready, .dat_fast(1'b0), .dat_we(1'b0), .dat_addr('0),
    .dat_wdata('0), .dat_rsp_valid, .dat_rdata,
    .mig_req_valid(1'b0), .mig_req_ready, .mig_op(MIG_FILL), .mig_fast_addr('0),
    .mig_slow_addr('0), .mig_done
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic addr_t idx_word(input int unsigned set, input int unsigned leaf);
    return addr_t'((0 * NSETS + set) * 256 + (leaf / 32) * 4);
  endfunction

  bit used [2][META];   // index bits planted per set, by leaf
  int skips;
  always @(posedge clk) if (skip) skips++;
  int pfs, pf_busy_cyc;
  always @(posedge clk) begin
    if (prefetch) pfs++;
    if (pf_busy)  pf_busy_cyc++;
  end

  task automatic pick(input int unsigned set, output btag_t v);
    @(negedge clk);
    req_valid = 1'b1; req_set = 1'(set);
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 1'b0;
    while (!done) begin @(posedge clk); #1; end
    v = victim;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  btag_t v;
  int unsigned exp_slot, rd0, sk0, exp_skips;

  initial begin
    req_valid = 0; req_set = 0; snoop_we = 0; pf_allow = 0; pfs = 0; pf_busy_cyc = 0; snoop_addr = '0; snoop_wdata = '0; skips = 0;
    for (int s = 0; s < 2; s++) begin
      for (int l = 0; l < META; l++) used[s][l] = 0;
      for (int w = 0; w < 64; w++) mem.fast_mem[addr_t'(s * 256 + w * 4)] = '0;
    end
    // set 0: leaves 0,1,2,40 and 67 hold metadata
    foreach (used[0][l]) if (l inside {0, 1, 2, 40, 67}) begin
      used[0][l] = 1;
      mem.fast_mem[idx_word(0, l)] = mem.fast_mem[idx_word(0, l)] | (32'h1 << (l % 32));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // one full turn of set 0 plus a few, against the expected order
    exp_slot = INT_BLKS;
    sk0 = skips;
    exp_skips = 0;
    for (int n = 0; n < 260; n++) begin
      while (exp_slot < META && used[0][exp_slot - INT_BLKS]) begin
        exp_slot = (exp_slot == FAST - 1) ? INT_BLKS : exp_slot + 1;
        exp_skips++;
      end
      pick(0, v);
      check(v == btag_t'(exp_slot), $sformatf("victim %0d expected %0d", v, exp_slot));
      exp_slot = (exp_slot == FAST - 1) ? INT_BLKS : exp_slot + 1;
    end
    check(skips - sk0 == exp_skips && exp_skips == 8,
          $sformatf("skipped %0d metadata slots (expected %0d)", skips - sk0, exp_skips));

    // set 1 has its own pointer; one read covers leaves 0..31
    rd0 = mem.md_reads;
    pick(1, v);
    check(v == btag_t'(1), "set 1 starts at the first leaf slot");
    check(mem.md_reads == rd0 + 1, "first leaf slot reads the index word");
    pick(1, v);
    check(v == btag_t'(2) && mem.md_reads == rd0 + 1, "buffered word reused");

    // leaf 2 (slot 3) becomes metadata: the write is snooped
    @(negedge clk);
    mem.fast_mem[idx_word(1, 2)] = 32'h4;
    snoop_we = 1'b1; snoop_addr = idx_word(1, 2); snoop_wdata = 32'h4;
    @(negedge clk);
    snoop_we = 1'b0;
    sk0 = skips;
    pick(1, v);
    check(v == btag_t'(4), "snooped index write makes the selector skip slot 3");
    check(skips - sk0 == 1, "one skip counted");
    check(pfs == 0 && pf_busy_cyc == 0, "no prefetch while it is not allowed");

    // walk set 1 up to slot 33 (leaf 32, the first bit of index word 1)
    for (int s = 5; s <= 32; s++) begin
      pick(1, v);
      check(v == btag_t'(s), $sformatf("set 1 victim %0d expected %0d", v, s));
    end
    rd0 = mem.md_reads;
    @(negedge clk) pf_allow = 1'b1;
    repeat (40) @(posedge clk);
    #1;
    check(pfs >= 1 && mem.md_reads == rd0 + pfs,
          $sformatf("idle prefetch: %0d prefetches, %0d reads", pfs, mem.md_reads - rd0));
    check(pf_busy_cyc >= 4, "pf_busy covers the prefetch read latency");
    @(negedge clk) pf_allow = 1'b0;
    rd0 = mem.md_reads;
    pick(1, v);
    check(v == btag_t'(33), "set 1 continues at slot 33");
    check(mem.md_reads == rd0, "prefetched index word needs no read");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
