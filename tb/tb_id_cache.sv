// tb_id_cache: self-checking test of the IdCache at its default size (256 sets
// x 16 ways of 32-bit identity vectors). Checks bit-level hits inside a
// super-block (address bits [12:8]), that a line with bit 0 is a miss, bit
// clearing, one-cycle latency, FIFO replacement among 17 super-blocks that the
// XOR-fold hash sends to one set, and that different super-blocks stay apart.
module tb_id_cache;
  import trimma_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       req_valid;
  logic [1:0] req_op;
  addr_t      req_addr;
  logic       ready;
  logic       rsp_valid, rsp_hit;

  id_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // super-block ID above bit 13, block within it at [12:8]
  function automatic addr_t mk(input longint unsigned sbid, input int unsigned blk);
    return addr_t'((sbid << 13) | (longint'(blk) << 8) | 8'h10);
  endfunction

  task automatic op(input logic [1:0] o, input addr_t a);
    @(negedge clk);
    req_valid = 1'b1; req_op = o; req_addr = a;
    @(posedge clk);
    #1 req_valid = 1'b0;
  endtask

  task automatic lookup(input addr_t a, output bit hit);
    op(2'd0, a);
    check(rsp_valid === 1'b1, "lookup answers after one cycle");
    hit = rsp_hit;
    @(posedge clk);
    #1 check(rsp_valid === 1'b0, "single response pulse");
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit hit;
  bit ref_bits [longint unsigned][32];

  initial begin
    req_valid = 0; req_op = 0; req_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (ready);
    @(posedge clk);

    lookup(mk(77, 3), hit);
    check(!hit, "empty cache misses");
    op(2'd1, mk(77, 3));
    lookup(mk(77, 3), hit);
    check(hit, "identity bit set -> hit");
    lookup(mk(77, 4), hit);
    check(!hit, "line present but bit 0 -> miss");
    op(2'd1, mk(77, 31));
    lookup(mk(77, 31), hit);
    check(hit, "second bit in the same line");
    lookup(mk(77, 3), hit);
    check(hit, "first bit kept when a second is set");
    lookup(mk(78, 3), hit);
    check(!hit, "other super-block misses");
    op(2'd2, mk(77, 3));
    lookup(mk(77, 3), hit);
    check(!hit, "cleared bit misses");
    lookup(mk(77, 31), hit);
    check(hit, "clearing one bit leaves the others");

    // (j<<8)|j folds to 0 for j < 256: 17 super-blocks in set 0
    for (int j = 1; j <= 16; j++) op(2'd1, mk((j << 8) | j, j % 32));
    for (int j = 1; j <= 16; j++) begin
      lookup(mk((j << 8) | j, j % 32), hit);
      check(hit, "16 super-blocks share one set");
    end
    op(2'd1, mk((17 << 8) | 17, 0));
    lookup(mk((1 << 8) | 1, 1), hit);
    check(!hit, "17th super-block evicts the oldest");
    lookup(mk((17 << 8) | 17, 0), hit);
    check(hit, "17th super-block present");
    lookup(mk((2 << 8) | 2, 2), hit);
    check(hit, "second oldest survives");
    // a set in a different hash bucket is untouched
    lookup(mk(77, 31), hit);
    check(hit, "other sets untouched");

    // random run over few super-blocks (no set overflows)
    for (int n = 0; n < 3000; n++) begin
      longint unsigned sb;
      int unsigned b, o;
      sb = 5000 + $urandom_range(0, 5);
      b  = $urandom_range(0, 31);
      o  = $urandom_range(0, 2);
      if (o == 1) begin op(2'd1, mk(sb, b)); ref_bits[sb][b] = 1'b1; end
      else if (o == 2) begin op(2'd2, mk(sb, b)); ref_bits[sb][b] = 1'b0; end
      else begin
        bit exp;
        exp = ref_bits.exists(sb) ? ref_bits[sb][b] : 1'b0;
        lookup(mk(sb, b), hit);
        check(hit == exp, "random lookup matches reference");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
