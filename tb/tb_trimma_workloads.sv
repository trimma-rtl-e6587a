// tb_trimma_workloads: the Trimma controller (cache mode) under three kinds of
// address stream that stand in for the benchmark classes of the evaluation:
// a drifting hot set (multi-program mixes), sequential sweeps over a window
// larger than the fast memory of the test system (array codes such as lbm or bwaves) and a steeply
// skewed distribution with a long tail (graph analytics, key-value stores).
// Each runs on its own controller at a reduced size that keeps the evaluated
// 32:1 slow-to-fast ratio: 2 sets of 256 fast and 8192 slow blocks (1 index
// block, 132 leaf blocks, 123 cache slots per set) and an iRC cut down by the
// same factor of 64 in sets (32x6 NonIdCache, 4x16 IdCache). The real
// benchmarks' traces are not reproduced; these streams only exercise the same
// mechanisms. Every read is checked against a reference memory. Reported per
// stream: fast-memory serve rate, iRC hit rate, how many migrations used a
// metadata block, and the share of fast memory the iRT occupies at the end
// (index blocks plus allocated leaves) against the fully reserved table. Checked: no read mismatch, every stream migrates, hits the
// iRC, and is served from fast memory at least a quarter of the time, far above
// the 3 % share of the visible blocks that fast memory can hold (the sweep gets
// there by touching several words of each block it brings in).
module tb_trimma_workloads;
  import trimma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned NP = 3;
  localparam int unsigned NEVB = $bits(events_t);
  logic [NP-1:0] done;

  // event bit positions (events_t is packed MSB first)
  localparam int unsigned B_NONID = NEVB - 2, B_ID = NEVB - 3, B_WALK = NEVB - 4,
                          B_FAST = NEVB - 5, B_SLOW = NEVB - 6, B_MIG = NEVB - 7,
                          B_META = NEVB - 8, B_ALLOC = NEVB - 11, B_FREE = NEVB - 12;
  localparam int unsigned FAST_ALL = 2 * 256, INT_ALL = 2 * 1;

  for (genvar g = 0; g < NP; g++) begin : w
    trimma_env #(.PATTERN(g), .NREQ(3000)) env (.clk, .rst_n, .done(done[g]));
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic report(input string nm, input int dchk, input int dfail,
                        input int unsigned c_nonid, input int unsigned c_id,
                        input int unsigned c_walk, input int unsigned c_fast,
                        input int unsigned c_slow, input int unsigned c_mig,
                        input int unsigned c_meta, input int unsigned c_alloc,
                        input int unsigned c_free);
    real serve, hit, md_frac;
    serve = 100.0 * c_fast / (c_fast + c_slow);
    hit   = 100.0 * (c_nonid + c_id) / (c_nonid + c_id + c_walk);
    md_frac = 100.0 * (INT_ALL + c_alloc - c_free) / FAST_ALL;
    $display("%-9s reads %0d  fast serve %5.1f%%  iRC hit %5.1f%%  migrations %0d (%0d into metadata blocks)  iRT in use %4.1f%% of fast memory (reserved %4.1f%%)",
             nm, dchk, serve, hit, c_mig, c_meta, md_frac, 100.0 * 2 * 133 / FAST_ALL);
    checks += dchk; failures += dfail;
    checks++; if (c_mig == 0)            begin failures++; $display("FAIL: %s never migrated", nm); end
    checks++; if (c_nonid + c_id == 0)   begin failures++; $display("FAIL: %s never hit the iRC", nm); end
    checks++;
    if (md_frac > 100.0 * 2 * 133 / FAST_ALL) begin failures++; $display("FAIL: %s iRT larger than reserved", nm); end
    checks++;
    if (serve < 25.0) begin failures++; $display("FAIL: %s rarely served by fast memory", nm); end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (&done);
    report("hot set", w[0].env.drv.checks, w[0].env.drv.failures,
           w[0].env.drv.cnt[B_NONID], w[0].env.drv.cnt[B_ID], w[0].env.drv.cnt[B_WALK],
           w[0].env.drv.cnt[B_FAST], w[0].env.drv.cnt[B_SLOW], w[0].env.drv.cnt[B_MIG],
           w[0].env.drv.cnt[B_META],
           w[0].env.drv.cnt[B_ALLOC], w[0].env.drv.cnt[B_FREE]);
    report("sweep", w[1].env.drv.checks, w[1].env.drv.failures,
           w[1].env.drv.cnt[B_NONID], w[1].env.drv.cnt[B_ID], w[1].env.drv.cnt[B_WALK],
           w[1].env.drv.cnt[B_FAST], w[1].env.drv.cnt[B_SLOW], w[1].env.drv.cnt[B_MIG],
           w[1].env.drv.cnt[B_META],
           w[1].env.drv.cnt[B_ALLOC], w[1].env.drv.cnt[B_FREE]);
    report("skewed", w[2].env.drv.checks, w[2].env.drv.failures,
           w[2].env.drv.cnt[B_NONID], w[2].env.drv.cnt[B_ID], w[2].env.drv.cnt[B_WALK],
           w[2].env.drv.cnt[B_FAST], w[2].env.drv.cnt[B_SLOW], w[2].env.drv.cnt[B_MIG],
           w[2].env.drv.cnt[B_META],
           w[2].env.drv.cnt[B_ALLOC], w[2].env.drv.cnt[B_FREE]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
