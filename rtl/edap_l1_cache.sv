// edap_l1_cache: effective-address-indexed L1 cache that holds cleartext
// inside the trusted footprint (L1 data cache 32 kB, L1 instruction cache
// 48 kB in the paper's evaluated core; 128-byte lines).
//
// Lines are indexed and tagged by effective address, as in the paper's use
// case, and each line also remembers its real address, since everything
// below the L1 is real-addressed. Misses go to the encryption engine
// (fill) and dirty victims are handed to it for encryption (writeback).
//
// Access rules of the paper's L2/L1 configuration:
//  * While the engine is engaged the cache holds the authorized program's
//    cleartext, and only problem-state requests (req_priv = 0) are served;
//    a privileged request is refused (resp_denied) and touches nothing.
//  * A fill that fails its integrity check is not installed; the request
//    ends with resp_fault (the paper: a violation "would cause exception").
//  * clr_req clears the cache: every dirty line is written back (encrypted
//    or raw, whatever the engine's mode is), and every line is invalidated
//    and its data zeroed. The transfer-of-control sequencer uses it.
//  * OP_ACQUIRE claims a block without reading memory: the line is
//    allocated zero-filled and dirty (the paper's instructions to
//    "initialize and set empty data cache block" and to acquire a block).
//  * OP_RELEASE erases a block: the L1 copy is invalidated and zeroed and
//    the engine writes an all-zero line, unencrypted, to memory, so the
//    block can be handed to others.
// With WRITABLE = 0 (instruction cache) only OP_LOAD is accepted.
//
// Organisation (this design's choice; the paper gives sizes only): SETS x
// WAYS lines, round-robin replacement per set, one request at a time.
// Port: valid/ready request, one resp_valid pulse per request. A load
// returns the aligned doubleword at ea[6:3] (byte 0 of the line is the
// most significant byte of doubleword 0); req_be[i] enables bits
// [8i+7:8i] of a store. A hit raises resp_valid on the clock edge after
// the one that takes the request;
// a miss adds the engine's fill time (L2 time + 20 cycles when engaged).
module edap_l1_cache
  import edap_pkg::*;
#(
  parameter int unsigned SETS     = 32,
  parameter int unsigned WAYS     = 8,
  parameter bit          WRITABLE = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       engaged,
  // core port
  input  logic       req_valid,
  output logic       req_ready,
  input  l1_op_e     req_op,
  input  addr_t      req_ea,
  input  addr_t      req_ra,
  input  logic [63:0] req_wdata,
  input  logic [7:0] req_be,
  input  logic       req_priv,
  output logic       resp_valid,
  output logic [63:0] resp_rdata,
  output logic       resp_fault,
  output logic       resp_denied,
  // clear
  input  logic       clr_req,
  output logic       clr_done,
  // engine fill port
  output logic       fill_valid,
  input  logic       fill_ready,
  output addr_t      fill_ea,
  output addr_t      fill_ra,
  input  logic       fill_resp_valid,
  input  line_t      fill_resp_data,
  input  logic       fill_resp_ok,
  // engine writeback port
  output logic       wb_valid,
  input  logic       wb_ready,
  output addr_t      wb_ea,
  output addr_t      wb_ra,
  output line_t      wb_data,
  output logic       wb_erase,
  // events
  output logic       ev_hit,
  output logic       ev_miss
);

  localparam int unsigned LINES  = SETS * WAYS;
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned LN_W   = $clog2(LINES);
  localparam int unsigned TAG_LO = OFFS_BITS + $clog2(SETS);
  localparam int unsigned TAG_W  = ADDR_BITS - TAG_LO;
  localparam int unsigned RL_W   = ADDR_BITS - OFFS_BITS;

  line_t             data  [LINES];
  logic [TAG_W-1:0]  tags  [LINES];
  logic [RL_W-1:0]   ralin [LINES];
  logic [LINES-1:0]  valid, dirty;
  logic [WAY_W-1:0]  vptr  [SETS];

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_VICTIM, S_FILL_REQ, S_FILL_WAIT,
                            S_RELEASE, S_CLR} st_e;
  st_e st;

  // latched request
  l1_op_e      q_op;
  addr_t       q_ea, q_ra;
  logic [63:0] q_wdata;
  logic [7:0]  q_be;
  logic        q_priv;

  logic [IDX_W-1:0] set_i;
  logic [TAG_W-1:0] tag_i;
  logic [3:0]       dw_i;
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic [LN_W-1:0]  hit_ln, vic_ln;
  logic [LN_W:0]    clr_ln;

  assign set_i = (SETS > 1) ? IDX_W'(q_ea[OFFS_BITS +: IDX_W]) : '0;
  assign tag_i = q_ea[ADDR_BITS-1:TAG_LO];
  assign dw_i  = q_ea[OFFS_BITS-1:3];

  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid[LN_W'(set_i * WAYS + w)] && tags[LN_W'(set_i * WAYS + w)] == tag_i) begin
        hit = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end
  assign hit_ln = LN_W'(set_i * WAYS + hit_way);
  assign vic_ln = LN_W'(set_i * WAYS + vptr[set_i]);

  // round-robin victim pointer, wrapping at WAYS (which need not be a
  // power of two: the instruction cache has 6 ways)
  function automatic logic [WAY_W-1:0] next_way(logic [WAY_W-1:0] w);
    return (32'(w) == WAYS - 1) ? '0 : w + 1'b1;
  endfunction

  // the clear walk has visited every line (LINES need not be a power of two)
  logic clr_end;
  assign clr_end = (32'(clr_ln) >= LINES);

  function automatic line_t merge(line_t l, logic [3:0] dw, logic [63:0] wd, logic [7:0] be);
    line_t r = l;
    for (int b = 0; b < 8; b++)
      if (be[b]) r[LINE_BITS - 64*dw - 64 + 8*b +: 8] = wd[8*b +: 8];
    return r;
  endfunction

  function automatic logic [63:0] dword(line_t l, logic [3:0] dw);
    return l[LINE_BITS - 1 - 64*dw -: 64];
  endfunction

  function automatic addr_t line_ea(logic [TAG_W-1:0] t, logic [IDX_W-1:0] s);
    addr_t a = '0;
    a[ADDR_BITS-1:TAG_LO] = t;
    if (SETS > 1) a[OFFS_BITS +: IDX_W] = s;
    return a;
  endfunction

  assign req_ready = (st == S_IDLE) && !clr_req;

  // engine ports
  assign fill_valid = (st == S_FILL_REQ);
  assign fill_ea    = {q_ea[ADDR_BITS-1:OFFS_BITS], {OFFS_BITS{1'b0}}};
  assign fill_ra    = {q_ra[ADDR_BITS-1:OFFS_BITS], {OFFS_BITS{1'b0}}};

  always_comb begin
    wb_valid = 1'b0; wb_ea = '0; wb_ra = '0; wb_data = '0; wb_erase = 1'b0;
    unique case (st)
      S_VICTIM: begin
        wb_valid = 1'b1;
        wb_ea    = line_ea(tags[vic_ln], set_i);
        wb_ra    = {ralin[vic_ln], {OFFS_BITS{1'b0}}};
        wb_data  = data[vic_ln];
      end
      S_RELEASE: begin
        wb_valid = 1'b1;
        wb_ea    = fill_ea;
        wb_ra    = fill_ra;
        wb_erase = 1'b1;
      end
      S_CLR: if (!clr_end && valid[clr_ln[LN_W-1:0]] && dirty[clr_ln[LN_W-1:0]]) begin
        wb_valid = 1'b1;
        wb_ea    = line_ea(tags[clr_ln[LN_W-1:0]], IDX_W'(clr_ln[LN_W-1:0] / WAYS));
        wb_ra    = {ralin[clr_ln[LN_W-1:0]], {OFFS_BITS{1'b0}}};
        wb_data  = data[clr_ln[LN_W-1:0]];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      valid <= '0; dirty <= '0;
      for (int s = 0; s < SETS; s++) vptr[s] <= '0;
      for (int l = 0; l < LINES; l++) begin data[l] <= '0; tags[l] <= '0; ralin[l] <= '0; end
      q_op <= OP_LOAD; q_ea <= '0; q_ra <= '0; q_wdata <= '0; q_be <= '0; q_priv <= 1'b0;
      resp_valid <= 1'b0; resp_rdata <= '0; resp_fault <= 1'b0; resp_denied <= 1'b0;
      clr_done <= 1'b0; clr_ln <= '0;
      ev_hit <= 1'b0; ev_miss <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      clr_done   <= 1'b0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (clr_req) begin
            clr_ln <= '0;
            st <= S_CLR;
          end else if (req_valid) begin
            q_op <= req_op; q_ea <= req_ea; q_ra <= req_ra;
            q_wdata <= req_wdata; q_be <= req_be; q_priv <= req_priv;
            st <= S_LOOK;
          end
        end

        S_LOOK: begin
          if ((engaged && q_priv) || (!WRITABLE && q_op != OP_LOAD)) begin
            resp_valid <= 1'b1; resp_denied <= 1'b1; resp_fault <= 1'b0; resp_rdata <= '0;
            st <= S_IDLE;
          end else if (q_op == OP_RELEASE) begin
            if (hit) begin
              valid[hit_ln] <= 1'b0;
              dirty[hit_ln] <= 1'b0;
              data[hit_ln]  <= '0;
            end
            st <= S_RELEASE;
          end else if (hit) begin
            ev_hit <= 1'b1;
            resp_valid <= 1'b1; resp_denied <= 1'b0; resp_fault <= 1'b0;
            resp_rdata <= (q_op == OP_LOAD) ? dword(data[hit_ln], dw_i) : '0;
            if (q_op == OP_STORE) begin
              data[hit_ln]  <= merge(data[hit_ln], dw_i, q_wdata, q_be);
              dirty[hit_ln] <= 1'b1;
            end else if (q_op == OP_ACQUIRE) begin
              data[hit_ln]  <= '0;
              dirty[hit_ln] <= 1'b1;
            end
            st <= S_IDLE;
          end else begin
            ev_miss <= 1'b1;
            st <= (valid[vic_ln] && dirty[vic_ln]) ? S_VICTIM
                : (q_op == OP_ACQUIRE) ? S_LOOK : S_FILL_REQ;
            if (!(valid[vic_ln] && dirty[vic_ln]) && q_op == OP_ACQUIRE) begin
              // allocate a zeroed, dirty line without reading memory
              data[vic_ln]  <= '0;
              tags[vic_ln]  <= tag_i;
              ralin[vic_ln] <= q_ra[ADDR_BITS-1:OFFS_BITS];
              valid[vic_ln] <= 1'b1;
              dirty[vic_ln] <= 1'b0;
              vptr[set_i]   <= next_way(vptr[set_i]);
            end
          end
        end

        S_VICTIM: if (wb_ready) begin
          dirty[vic_ln] <= 1'b0;
          valid[vic_ln] <= 1'b0;
          st <= (q_op == OP_ACQUIRE) ? S_LOOK : S_FILL_REQ;
        end

        S_FILL_REQ: if (fill_ready) st <= S_FILL_WAIT;

        S_FILL_WAIT: if (fill_resp_valid) begin
          if (fill_resp_ok) begin
            data[vic_ln]  <= fill_resp_data;
            tags[vic_ln]  <= tag_i;
            ralin[vic_ln] <= q_ra[ADDR_BITS-1:OFFS_BITS];
            valid[vic_ln] <= 1'b1;
            dirty[vic_ln] <= 1'b0;
            vptr[set_i]   <= next_way(vptr[set_i]);
            st <= S_LOOK;          // replay as a hit
          end else begin
            resp_valid <= 1'b1; resp_fault <= 1'b1; resp_denied <= 1'b0; resp_rdata <= '0;
            st <= S_IDLE;
          end
        end

        S_RELEASE: if (wb_ready) begin
          resp_valid <= 1'b1; resp_fault <= 1'b0; resp_denied <= 1'b0; resp_rdata <= '0;
          st <= S_IDLE;
        end

        S_CLR: begin
          if (clr_end) begin
            clr_done <= 1'b1;
            st <= S_IDLE;
          end else if (!(valid[clr_ln[LN_W-1:0]] && dirty[clr_ln[LN_W-1:0]]) || wb_ready) begin
            valid[clr_ln[LN_W-1:0]] <= 1'b0;
            dirty[clr_ln[LN_W-1:0]] <= 1'b0;
            data[clr_ln[LN_W-1:0]]  <= '0;
            clr_ln <= clr_ln + 1'b1;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  // a request is answered exactly once, a privileged request while engaged
  // never sees data
  a_denied_no_data: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid && resp_denied |-> resp_rdata == '0);

endmodule
