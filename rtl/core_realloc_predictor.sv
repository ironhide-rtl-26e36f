// core_realloc_predictor: the gradient (slope) based heuristic that decides
// how many tiles the secure and the insecure cluster get for one invocation
// of an interactive application with one secure (process 0) and one insecure
// (process 1) process.
//
// Input: for each process an offline-profiled trend of its shared-cache
// misses per kilo-instruction against core count, NPTS points (point i =
// i+1 cores), each an unsigned Q0.16 fraction of the process's largest MPKI,
// written through wr_*. Slopes are taken on normalised axes: the slope into
// point i is |M[i-1] - M[i]| * NPTS, so a slope of 1.0 means the MPKI falls by
// its full range over the full core range.
//
// On start, per process:
//   point B (start of saturation): scanning from the last point down, the
//     first point whose slope exceeds TH_B (0.1);
//   point A (start of the linear region): scanning from point 1 up, the first
//     point whose slope is below TH_A (0.5), and at most B.
// Then with cores at B, c0 and c1, Rdesired = c0 + c1 and N = NPTS cores:
//   Rdesired == N : (c0, c1).
//   Rdesired <  N : Anomaly = N - Rdesired spare cores are split equally;
//                   an odd spare core goes to the insecure cluster.
//   Rdesired >  N : Anomaly = Rdesired - N cores are removed. Linear-region
//                   slope of each process: (M[A]-M[B]) / (B-A);
//                   SR = smaller slope / larger slope;
//                   AdjustFactor = ceil(Anomaly * SR), computed exactly as
//                   ceil(Anomaly*dMs*dCl / (dMl*dCs)) with a sequential
//                   divider; the larger-slope process loses AdjustFactor cores
//                   and the other loses Anomaly - AdjustFactor, so the two
//                   sum to N. Each result is kept at one core at least.
// done pulses with secure_cores / insecure_cores. Latency: about 4*NPTS cycles
// of scans plus 33 cycles of division. The thresholds, the region search and
// Eq. (1)-(3) follow the described heuristic. The removal from the
// smaller-slope process is printed as (1 - AdjustFactor) in the source
// description, which would not keep the total at N; Anomaly - AdjustFactor
// is used instead. Number format, tie breaks and the one-core floor are this
// design's own choices.
module core_realloc_predictor #(
  parameter int unsigned NPTS = 64,
  parameter int unsigned TH_B = 6554,    // 0.1 in Q0.16
  parameter int unsigned TH_A = 32768,   // 0.5 in Q0.16
  localparam int unsigned IW  = $clog2(NPTS),
  localparam int unsigned CW  = $clog2(NPTS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic          wr_proc,
  input  logic [IW-1:0] wr_idx,
  input  logic [15:0]   wr_val,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [CW-1:0] secure_cores,
  output logic [CW-1:0] insecure_cores,
  output logic [IW-1:0] point_a [2],
  output logic [IW-1:0] point_b [2]
);

  typedef enum logic [2:0] {S_IDLE, S_SCAN_B, S_SCAN_A, S_CALC, S_DIV, S_FIN} state_e;

  logic [15:0]   m_q [2][NPTS];
  state_e        state_q;
  logic          p_q;
  logic [IW-1:0] i_q;
  logic [IW-1:0] a_q [2];
  logic [IW-1:0] b_q [2];

  // divider
  logic [31:0]   num_q, den_q, quo_q, rem_q;
  logic [5:0]    dcnt_q;
  logic          large_q;                 // process with the larger slope
  logic [CW:0]   anom_q;
  logic [CW:0]   cb_q [2];

  // slope into point i_q of process p_q
  logic [15:0]   diff;
  logic [23:0]   slope;
  assign diff  = (m_q[p_q][i_q - 1'b1] > m_q[p_q][i_q]) ?
                 m_q[p_q][i_q - 1'b1] - m_q[p_q][i_q] : m_q[p_q][i_q] - m_q[p_q][i_q - 1'b1];
  assign slope = 24'(diff) * 24'(NPTS);

  // linear-region rise and run of both processes
  logic [15:0] dm [2];
  logic [IW-1:0] dc [2];
  logic        zs [2];
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      dm[p] = (m_q[p][a_q[p]] > m_q[p][b_q[p]]) ? m_q[p][a_q[p]] - m_q[p][b_q[p]] : '0;
      dc[p] = b_q[p] - a_q[p];
      zs[p] = (dm[p] == '0) || (dc[p] == '0);
    end
  end

  logic [31:0] x0, x1;  // slope0 ~ dm0/dc0 vs slope1 ~ dm1/dc1 by cross products
  assign x0 = 32'(dm[0]) * 32'(dc[1]);
  assign x1 = 32'(dm[1]) * 32'(dc[0]);

  assign busy = (state_q != S_IDLE);
  assign point_a = a_q;
  assign point_b = b_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      p_q <= 1'b0; i_q <= '0;
      a_q[0] <= '0; a_q[1] <= '0; b_q[0] <= '0; b_q[1] <= '0;
      num_q <= '0; den_q <= '0; quo_q <= '0; rem_q <= '0; dcnt_q <= '0;
      large_q <= 1'b0; anom_q <= '0; cb_q[0] <= '0; cb_q[1] <= '0;
      done <= 1'b0; secure_cores <= '0; insecure_cores <= '0;
      for (int p = 0; p < 2; p++)
        for (int i = 0; i < int'(NPTS); i++) m_q[p][i] <= '0;
    end else begin
      done <= 1'b0;
      if (wr_en && state_q == S_IDLE) m_q[wr_proc][wr_idx] <= wr_val;
      case (state_q)
        S_IDLE: if (start) begin
          p_q     <= 1'b0;
          i_q     <= IW'(NPTS - 1);
          state_q <= S_SCAN_B;
        end
        S_SCAN_B: begin
          if (slope > 24'(TH_B)) begin
            b_q[p_q] <= i_q;
            i_q      <= IW'(1);
            state_q  <= S_SCAN_A;
          end else if (i_q == IW'(1)) begin
            b_q[p_q] <= '0;
            i_q      <= IW'(1);
            state_q  <= S_SCAN_A;
          end else i_q <= i_q - 1'b1;
        end
        S_SCAN_A: begin
          if (i_q >= b_q[p_q] || slope < 24'(TH_A)) begin
            a_q[p_q] <= (i_q >= b_q[p_q]) ? b_q[p_q] : i_q;
            if (p_q == 1'b0) begin
              p_q     <= 1'b1;
              i_q     <= IW'(NPTS - 1);
              state_q <= S_SCAN_B;
            end else state_q <= S_CALC;
          end else i_q <= i_q + 1'b1;
        end
        S_CALC: begin
          logic [CW:0] c0, c1, rd, sp;
          logic        lg;
          c0 = (CW+1)'(b_q[0]) + 1'b1;
          c1 = (CW+1)'(b_q[1]) + 1'b1;
          rd = c0 + c1;
          sp = (CW+1)'(NPTS) - rd;
          cb_q[0] <= c0;
          cb_q[1] <= c1;
          if (int'(rd) == int'(NPTS)) begin
            secure_cores   <= CW'(c0);
            insecure_cores <= CW'(c1);
            state_q        <= S_FIN;
          end else if (int'(rd) < int'(NPTS)) begin
            secure_cores   <= CW'(c0 + (sp >> 1));
            insecure_cores <= CW'(c1 + sp - (sp >> 1));
            state_q        <= S_FIN;
          end else begin
            anom_q <= rd - (CW+1)'(NPTS);
            // larger slope: a zero slope is never the larger unless both are
            if (zs[1] && !zs[0])      lg = 1'b0;
            else if (zs[0] && !zs[1]) lg = 1'b1;
            else                      lg = (x1 > x0);
            large_q <= lg;
            if (zs[!lg]) begin
              // smaller slope zero: SR = 0 unless both are zero (SR := 1/2)
              num_q <= zs[lg] ? 32'(rd - (CW+1)'(NPTS)) : 32'd0;
              den_q <= zs[lg] ? 32'd2 : 32'd1;
            end else begin
              num_q <= 32'(rd - (CW+1)'(NPTS)) * 32'(dm[!lg]) * 32'(dc[lg]);
              den_q <= 32'(dm[lg]) * 32'(dc[!lg]);
            end
            dcnt_q  <= '0;
            quo_q   <= '0;
            rem_q   <= '0;
            state_q <= S_DIV;
          end
        end
        S_DIV: begin
          // restoring division of num_q + den_q - 1 by den_q (ceiling)
          logic [31:0] n, r;
          n = num_q + den_q - 1;
          r = {rem_q[30:0], n[31 - dcnt_q[4:0]]};
          if (r >= den_q) begin
            rem_q <= r - den_q;
            quo_q <= {quo_q[30:0], 1'b1};
          end else begin
            rem_q <= r;
            quo_q <= {quo_q[30:0], 1'b0};
          end
          dcnt_q <= dcnt_q + 1'b1;
          if (dcnt_q == 6'd31) state_q <= S_FIN;
          else state_q <= S_DIV;
          if (dcnt_q == 6'd31) begin
            int af, rl, rs;
            af = int'({quo_q[30:0], (r >= den_q)});
            if (af > int'(anom_q)) af = int'(anom_q);
            rl = int'(cb_q[large_q]) - af;
            rs = int'(cb_q[!large_q]) - (int'(anom_q) - af);
            if (rl < 1) begin rs = rs - (1 - rl); rl = 1; end
            if (rs < 1) begin rl = rl - (1 - rs); rs = 1; end
            secure_cores   <= CW'(large_q ? rs : rl);
            insecure_cores <= CW'(large_q ? rl : rs);
          end
        end
        S_FIN: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
