// hybrid_mem_model: behavioural model of the two memory tiers (not synthesizable).
//
// Stands in for the fast memory (e.g. HBM3) and the slow memory (e.g. DDR5)
// behind the Trimma controller. Both are sparse word arrays. A location that was
// never written reads as a scrambled function of its address, so a controller
// that trusts uninitialised metadata is caught. Three ports, matching
// trimma_ctrl:
//   md_*   metadata words in fast memory, latency FAST_LAT
//   dat_*  demand word accesses to either tier, latency FAST_LAT or SLOW_LAT
//   mig_*  256 B block fill / writeback / swap, done MIG_LAT cycles later
// Requests are accepted when ready (ready drops at random when RAND_STALL is set);
// reads are answered in order, no earlier than one cycle after the request.
module hybrid_mem_model
  import trimma_pkg::*;
#(
  parameter int unsigned FAST_LAT   = 3,
  parameter int unsigned SLOW_LAT   = 8,
  parameter int unsigned MIG_LAT    = 20,
  parameter bit          RAND_STALL = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    md_req_valid,
  output logic    md_req_ready,
  input  logic    md_we,
  input  addr_t   md_addr,
  input  word_t   md_wdata,
  output logic    md_rsp_valid,
  output word_t   md_rdata,
  input  logic    dat_req_valid,
  output logic    dat_req_ready,
  input  logic    dat_fast,
  input  logic    dat_we,
  input  addr_t   dat_addr,
  input  word_t   dat_wdata,
  output logic    dat_rsp_valid,
  output word_t   dat_rdata,
  input  logic    mig_req_valid,
  output logic    mig_req_ready,
  input  mig_op_e mig_op,
  input  addr_t   mig_fast_addr,
  input  addr_t   mig_slow_addr,
  output logic    mig_done
);
  word_t fast_mem [addr_t];
  word_t slow_mem [addr_t];

  longint unsigned cyc;
  longint unsigned md_t[$], dat_t[$];
  word_t           md_d[$], dat_d[$];
  longint unsigned mig_t[$];

  // statistics for the testbenches
  int unsigned md_reads, md_writes, max_md_outstanding;

  function automatic word_t scramble(input addr_t a, input bit fast);
    return word_t'((a * 64'h9E3779B97F4A7C15) >> 17) ^ (fast ? 32'hA5A5_0000 : 32'h0000_5A5A);
  endfunction

  function automatic word_t rd_fast(input addr_t a);
    return fast_mem.exists(a) ? fast_mem[a] : scramble(a, 1'b1);
  endfunction
  function automatic word_t rd_slow(input addr_t a);
    return slow_mem.exists(a) ? slow_mem[a] : scramble(a, 1'b0);
  endfunction

  logic md_rdy_q, dat_rdy_q, mig_rdy_q;
  assign md_req_ready  = md_rdy_q;
  assign dat_req_ready = dat_rdy_q;
  assign mig_req_ready = mig_rdy_q && mig_t.size() == 0;

  initial begin
    cyc = 0; md_reads = 0; md_writes = 0; max_md_outstanding = 0;
    md_rdy_q = 1'b1; dat_rdy_q = 1'b1; mig_rdy_q = 1'b1;
    md_rsp_valid = 1'b0; dat_rsp_valid = 1'b0; mig_done = 1'b0;
    md_rdata = '0; dat_rdata = '0;
  end

  always @(posedge clk) begin
    longint unsigned t;
    cyc <= cyc + 1;
    md_rsp_valid  <= 1'b0;
    dat_rsp_valid <= 1'b0;
    mig_done      <= 1'b0;
    // responses due this cycle
    if (md_t.size() > 0 && md_t[0] <= cyc) begin
      void'(md_t.pop_front());
      md_rsp_valid <= 1'b1;
      md_rdata     <= md_d.pop_front();
    end
    if (dat_t.size() > 0 && dat_t[0] <= cyc) begin
      void'(dat_t.pop_front());
      dat_rsp_valid <= 1'b1;
      dat_rdata     <= dat_d.pop_front();
    end
    if (mig_t.size() > 0 && mig_t[0] <= cyc) begin
      void'(mig_t.pop_front());
      mig_done <= 1'b1;
    end
    // new requests
    if (rst_n && md_req_valid && md_req_ready) begin
      if (md_we) begin
        fast_mem[md_addr] = md_wdata;
        md_writes++;
      end else begin
        t = cyc + FAST_LAT;
        if (md_t.size() > 0 && md_t[md_t.size()-1] >= t) t = md_t[md_t.size()-1] + 1;
        md_t.push_back(t);
        md_d.push_back(rd_fast(md_addr));
        md_reads++;
        if (md_t.size() > max_md_outstanding) max_md_outstanding = md_t.size();
      end
    end
    if (rst_n && dat_req_valid && dat_req_ready) begin
      if (dat_we) begin
        if (dat_fast) fast_mem[dat_addr] = dat_wdata;
        else          slow_mem[dat_addr] = dat_wdata;
      end else begin
        t = cyc + (dat_fast ? FAST_LAT : SLOW_LAT);
        if (dat_t.size() > 0 && dat_t[dat_t.size()-1] >= t) t = dat_t[dat_t.size()-1] + 1;
        dat_t.push_back(t);
        dat_d.push_back(dat_fast ? rd_fast(dat_addr) : rd_slow(dat_addr));
      end
    end
    if (rst_n && mig_req_valid && mig_req_ready) begin
      for (int w = 0; w < WORDS_PER_BLK; w++) begin
        addr_t fa, sa;
        word_t fv, sv;
        fa = mig_fast_addr + addr_t'(w * 4);
        sa = mig_slow_addr + addr_t'(w * 4);
        fv = rd_fast(fa);
        sv = rd_slow(sa);
        case (mig_op)
          MIG_FILL:      fast_mem[fa] = sv;
          MIG_WRITEBACK: slow_mem[sa] = fv;
          default: begin fast_mem[fa] = sv; slow_mem[sa] = fv; end
        endcase
      end
      mig_t.push_back(cyc + MIG_LAT);
    end
    if (RAND_STALL) begin
      md_rdy_q  <= ($urandom_range(0, 7) != 0);
      dat_rdy_q <= ($urandom_range(0, 7) != 0);
      mig_rdy_q <= ($urandom_range(0, 3) != 0);
    end
  end

endmodule
