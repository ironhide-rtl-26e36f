// priv_cache: a core's private L1 data cache with the flush-and-invalidate
// routine used to scrub a core before it changes cluster.
//
// Direct-mapped, write-back, write-allocate; SIZE_BYTES of data in lines of
// LINE_BYTES, accessed one 64-bit word at a time. A request is accepted in
// IDLE and looked up in the next cycle (hit latency 2 cycles from acceptance
// to resp_valid; a write responds too, with its old data). A miss first writes
// back a dirty victim, then requests the line (mem_req_*), waits for
// mem_resp_valid and retries the lookup. Write-backs are posted: no response.
// Every line request carries the cluster of the core (core_secure).
//
// Flush-and-invalidate: a flush_req pulse (taken when no access is in flight)
// walks all sets in index order, writes every valid dirty line back to the
// next level and clears every valid bit; flush_done pulses once at the end.
// No core request is accepted meanwhile. Afterwards nothing of the previous
// process is left in the cache, so the next owner of the core cannot probe it.
// The walk takes one cycle per clean set plus the write-back handshake per
// dirty set. The 32 KB size is the evaluated chip's; organisation,
// associativity (direct-mapped) and line size are this design's own choices.
module priv_cache
  import ih_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              core_secure,
  // core side
  input  logic              req_valid,
  input  core_req_t         req,
  output logic              req_ready,
  output logic              resp_valid,
  output logic [WORD_W-1:0] resp_rdata,
  // next level
  output logic              mem_req_valid,
  output mem_req_t          mem_req,
  input  logic              mem_req_ready,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data,
  // flush-and-invalidate
  input  logic              flush_req,
  output logic              flush_busy,
  output logic              flush_done
);

  localparam int unsigned SETS  = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned IW    = $clog2(SETS);
  localparam int unsigned TAG_W = PADDR_W - OFF_W - IW;
  localparam int unsigned WPL   = LINE_W / WORD_W;     // words per line
  localparam int unsigned WOW   = $clog2(WPL);

  typedef enum logic [2:0] {S_IDLE, S_TAG, S_WB, S_FILL, S_WAIT, S_FLUSH, S_FLUSH_WB}
    state_e;

  logic [LINE_W-1:0] data_q  [SETS];
  logic [TAG_W-1:0]  tag_q   [SETS];
  logic [SETS-1:0]   valid_q, dirty_q;

  state_e            state_q;
  core_req_t         r_q;
  logic [IW-1:0]     fidx_q;
  logic              flush_pend_q;

  logic [IW-1:0]     idx;
  logic [TAG_W-1:0]  tag;
  logic [WOW-1:0]    woff;
  logic              hit;
  logic [IW-1:0]     sel;

  assign idx  = r_q.addr[OFF_W +: IW];
  assign tag  = r_q.addr[PADDR_W-1 -: TAG_W];
  assign woff = r_q.addr[OFF_W-1 -: WOW];
  assign hit  = valid_q[idx] && (tag_q[idx] == tag);
  assign sel  = (state_q == S_FLUSH || state_q == S_FLUSH_WB) ? fidx_q : idx;

  assign req_ready  = (state_q == S_IDLE) && !flush_req && !flush_pend_q;
  assign flush_busy = (state_q == S_FLUSH) || (state_q == S_FLUSH_WB) || flush_pend_q;

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req.addr  = '0;
    mem_req.we    = 1'b0;
    mem_req.wdata = data_q[sel];
    mem_req.cl    = core_secure ? CL_SECURE : CL_INSECURE;
    case (state_q)
      S_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = {tag_q[idx], idx, OFF_W'(0)};
      end
      S_FILL: begin
        mem_req_valid = 1'b1;
        mem_req.addr  = {tag, idx, OFF_W'(0)};
      end
      S_FLUSH_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = {tag_q[fidx_q], fidx_q, OFF_W'(0)};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      valid_q      <= '0;
      dirty_q      <= '0;
      fidx_q       <= '0;
      flush_pend_q <= 1'b0;
      r_q          <= '0;
      resp_valid   <= 1'b0;
      resp_rdata   <= '0;
      flush_done   <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      flush_done <= 1'b0;
      if (flush_req) flush_pend_q <= 1'b1;
      case (state_q)
        S_IDLE: begin
          if (flush_req || flush_pend_q) begin
            flush_pend_q <= 1'b0;
            fidx_q       <= '0;
            state_q      <= S_FLUSH;
          end else if (req_valid) begin
            r_q     <= req;
            state_q <= S_TAG;
          end
        end
        S_TAG: begin
          if (hit) begin
            resp_valid <= 1'b1;
            resp_rdata <= data_q[idx][woff*WORD_W +: WORD_W];
            if (r_q.we) begin
              data_q[idx][woff*WORD_W +: WORD_W] <= r_q.wdata;
              dirty_q[idx] <= 1'b1;
            end
            state_q <= S_IDLE;
          end else if (valid_q[idx] && dirty_q[idx]) state_q <= S_WB;
          else state_q <= S_FILL;
        end
        S_WB:   if (mem_req_ready) state_q <= S_FILL;
        S_FILL: if (mem_req_ready) state_q <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          data_q[idx]  <= mem_resp_data;
          tag_q[idx]   <= tag;
          valid_q[idx] <= 1'b1;
          dirty_q[idx] <= 1'b0;
          state_q      <= S_TAG;
        end
        S_FLUSH: begin
          if (valid_q[fidx_q] && dirty_q[fidx_q]) state_q <= S_FLUSH_WB;
          else begin
            valid_q[fidx_q] <= 1'b0;
            dirty_q[fidx_q] <= 1'b0;
            fidx_q <= fidx_q + 1'b1;
            if (int'(fidx_q) == int'(SETS) - 1) begin
              flush_done <= 1'b1;
              state_q    <= S_IDLE;
            end
          end
        end
        S_FLUSH_WB: if (mem_req_ready) begin
          valid_q[fidx_q] <= 1'b0;
          dirty_q[fidx_q] <= 1'b0;
          fidx_q <= fidx_q + 1'b1;
          if (int'(fidx_q) == int'(SETS) - 1) begin
            flush_done <= 1'b1;
            state_q    <= S_IDLE;
          end else state_q <= S_FLUSH;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
