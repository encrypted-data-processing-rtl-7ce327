// l2_model: behavioural model of the L2 side for the testbenches (the
// paper's 1 MB L2 and the memory below it are conventional and outside the
// trusted footprint). It stores ciphertext lines with their 8-byte digest
// by real line address; lines never written read as zero. One read is
// outstanding at a time and is answered LATENCY cycles after it is taken;
// writes are taken at once. poke/peek give the testbench direct access,
// as an attacker or a loader would have.
module l2_model
  import edap_pkg::*;
#(
  parameter int LATENCY = 8
) (
  input  logic    clk,
  input  logic    rd_valid,
  output logic    rd_ready,
  input  addr_t   rd_ra,
  output logic    rd_resp_valid,
  output line_t   rd_resp_data,
  output digest_t rd_resp_digest,
  input  logic    wr_valid,
  output logic    wr_ready,
  input  addr_t   wr_ra,
  input  line_t   wr_data,
  input  digest_t wr_digest
);
  line_t   mem [addr_t];
  digest_t dig [addr_t];
  int      cnt = 0;
  addr_t   pend;
  int      reads = 0, writes = 0;

  assign rd_ready = (cnt == 0);
  assign wr_ready = 1'b1;

  function automatic addr_t key(addr_t ra);
    return ra >> OFFS_BITS;
  endfunction

  function automatic void poke(addr_t ra, line_t l, digest_t d);
    mem[key(ra)] = l;
    dig[key(ra)] = d;
  endfunction

  function automatic line_t peek(addr_t ra);
    return mem.exists(key(ra)) ? mem[key(ra)] : '0;
  endfunction

  function automatic digest_t peek_digest(addr_t ra);
    return dig.exists(key(ra)) ? dig[key(ra)] : '0;
  endfunction

  initial begin
    rd_resp_valid = 0; rd_resp_data = '0; rd_resp_digest = '0;
  end

  always @(posedge clk) begin
    rd_resp_valid <= 1'b0;
    if (cnt > 0) begin
      cnt <= cnt - 1;
      if (cnt == 1) begin
        rd_resp_valid  <= 1'b1;
        rd_resp_data   <= peek(pend);
        rd_resp_digest <= peek_digest(pend);
      end
    end else if (rd_valid) begin
      pend <= rd_ra;
      cnt  <= LATENCY;
      reads++;
    end
    if (wr_valid) begin
      poke(wr_ra, wr_data, wr_digest);
      writes++;
    end
  end
endmodule
