// trimma_driver: request generator and checker for end-to-end tests of
// trimma_ctrl (testbench helper, not synthesizable).
//
// Issues NREQ reads and writes of single words to software-visible physical
// addresses: most go to a small hot set of blocks, the rest anywhere, so blocks
// are cached, hit, evicted, written back and swapped. A reference memory indexed
// by physical address predicts every read; a word never written reads as the
// scrambled value the memory model gives the word's home location, worked out
// here from the address layout (a physical tag below FAST is a fast-flat block,
// otherwise it lives in slow memory). After the run every word touched is read
// back once more. Counts each mechanism pulse of the controller in cnt[].
//
// PATTERN selects the address stream:
//   0  hot set: 75 % of requests to HOTN blocks that drift slowly, 25 % uniform
//   1  streaming: sweeps a window of STREAM_BLKS consecutive blocks over and
//      over, touching WORDS words of each block in turn (array codes)
//   2  skewed: block chosen with probability falling steeply with its distance
//      from the start of the visible space (u^8 for uniform u), so a few blocks
//      take most requests and the tail is long (graph and key-value codes)
// One write in three in every pattern.
module trimma_driver
  import trimma_pkg::*;
#(
  parameter int unsigned NSETS = 2,
  parameter int unsigned FAST  = 128,
  parameter int unsigned SLOW  = 2048,
  parameter int unsigned FLAT  = 0,
  parameter int unsigned NREQ  = 2000,
  parameter int unsigned HOTN  = 48,
  parameter int unsigned WORDS = 4,     // distinct words used per block
  parameter int unsigned PATTERN = 0,
  parameter int unsigned STREAM_BLKS = 512
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    init_done,
  output logic    req_valid,
  input  logic    req_ready,
  output addr_t   req_addr,
  output logic    req_we,
  output word_t   req_wdata,
  input  logic    rsp_valid,
  input  word_t   rsp_rdata,
  input  events_t events,
  output logic    done
);
  localparam int unsigned NEV = $bits(events_t);
  localparam int unsigned SET_W = $clog2(NSETS > 1 ? NSETS : 2);
  localparam longint unsigned LO = longint'(FAST) - longint'(FLAT);  // first visible tag
  localparam longint unsigned HI = longint'(FAST) + longint'(SLOW);

  int checks = 0, failures = 0;
  int unsigned cnt [NEV];
  int unsigned stalls = 0, reqs = 0;
  word_t ref_mem [addr_t];
  addr_t hot [HOTN];

  function automatic word_t scramble(input addr_t a, input bit fast);
    return word_t'((a * 64'h9E3779B97F4A7C15) >> 17) ^ (fast ? 32'hA5A5_0000 : 32'h0000_5A5A);
  endfunction

  function automatic word_t initial_value(input addr_t pa);
    longint unsigned tag, set, off;
    off = longint'(pa) & 255;
    set = (longint'(pa) >> OFF_W) & (NSETS - 1);
    tag = longint'(pa) >> (OFF_W + SET_W);
    if (tag < FAST) return scramble(addr_t'(((tag * NSETS + set) << OFF_W) + off), 1'b1);
    return scramble(addr_t'((((tag - FAST) * NSETS + set) << OFF_W) + off), 1'b0);
  endfunction

  function automatic addr_t rand_block();
    longint unsigned tag, set;
    tag = LO + longint'($urandom_range(0, 32'(HI - LO - 1)));
    set = longint'($urandom_range(0, NSETS - 1));
    return addr_t'(((tag << SET_W) | set) << OFF_W);
  endfunction

  function automatic addr_t skewed_block();
    real u;
    longint unsigned span, idx, tag, set, b;
    u    = real'($urandom) / 4294967296.0;
    span = (HI - LO) * NSETS;
    idx  = longint'((u * u) * (u * u) * (u * u) * (u * u) * real'(span));
    if (idx >= span) idx = span - 1;
    b    = idx;
    set  = b % NSETS;
    tag  = LO + b / NSETS;
    return addr_t'(((tag << SET_W) | set) << OFF_W);
  endfunction

  function automatic addr_t stream_block(input longint unsigned n);
    longint unsigned b, tag, set;
    b   = (n / WORDS) % STREAM_BLKS;
    set = b % NSETS;
    tag = LO + b / NSETS;
    return addr_t'(((tag << SET_W) | set) << OFF_W);
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NEV; i++) if (events[i]) cnt[i]++;
      if (req_valid && !req_ready) stalls++;
    end
  end

  task automatic access(input addr_t a, input bit we, input word_t wd);
    @(negedge clk);
    req_valid = 1'b1; req_addr = a; req_we = we; req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 1'b0;
    reqs++;
    while (!rsp_valid) begin @(posedge clk); #1; end
    if (we) ref_mem[a] = wd;
    else begin
      word_t exp;
      exp = ref_mem.exists(a) ? ref_mem[a] : initial_value(a);
      checks++;
      if (rsp_rdata !== exp) begin
        failures++;
        if (failures < 10)
          $display("FAIL: read %h returned %h, expected %h", a, rsp_rdata, exp);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < NEV; i++) cnt[i] = 0;
    req_valid = 0; req_addr = '0; req_we = 0; req_wdata = '0; done = 0;
    for (int i = 0; i < HOTN; i++) hot[i] = rand_block();
    wait (rst_n && init_done);
    for (int n = 0; n < NREQ; n++) begin
      addr_t a;
      // the hot set drifts slowly so old blocks fall out of fast memory
      if (n % 64 == 63) hot[$urandom_range(0, HOTN - 1)] = rand_block();
      if (PATTERN == 1)
        a = stream_block(n) | addr_t'((n % WORDS) * 4);
      else begin
        if (PATTERN == 2) a = skewed_block();
        else a = ($urandom_range(0, 99) < 75) ? hot[$urandom_range(0, HOTN - 1)] : rand_block();
        a = a | addr_t'($urandom_range(0, WORDS - 1) * 4);
      end
      access(a, $urandom_range(0, 2) == 0, $urandom);
    end
    // read back everything written
    foreach (ref_mem[a]) access(a, 1'b0, '0);
    done = 1;
  end

endmodule
