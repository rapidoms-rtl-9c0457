// fdr_filter: target-decoy false-discovery-rate filter for one result set
// (standard or open search). It collects the n best matches of a query set,
// each marked target or decoy, in a result buffer while building score
// histograms of target and decoy matches. It then walks the score range from
// the highest score down, accumulating targets T and decoys D, and keeps the
// lowest score s at which D/T <= FDR_PCT percent (D*100 <= T*FDR_PCT with
// T > 0). Finally it replays the buffer and passes on every target match with
// score >= s; decoys, queries without a match and matches below s are dropped.
//
// Follows the accelerator: target-decoy approach, FDR = decoys / targets,
// 1 % threshold. The histogram method, the exact threshold rule and the
// streaming interface are this design's own choices.
//
// Interface: in_valid/in_ready/in_res take n results, then out_valid/
// out_ready/out_res give the accepted ones and done pulses at the end with
// thr/thr_valid (thr_valid = 0: no score reaches the FDR, nothing passes).
// Timing: DHV+1 cycles of histogram clearing after reset, one result per
// cycle in, DHV+1 cycles of threshold walk, two cycles per buffered result out.
module fdr_filter
  import rapidoms_pkg::*;
#(
  parameter int unsigned DHV_P   = rapidoms_pkg::DHV,
  parameter int unsigned MAX_Q_P = rapidoms_pkg::MAX_Q,
  parameter int unsigned FDR_PCT = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [$clog2(MAX_Q_P+1)-1:0] n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  result_t                      in_res,
  output logic                         out_valid,
  input  logic                         out_ready,
  output result_t                      out_res,
  output score_t                       thr,
  output logic                         thr_valid,
  output logic                         done
);
  localparam int unsigned QW  = $clog2(MAX_Q_P + 1);
  localparam int unsigned QAW = $clog2(MAX_Q_P);
  localparam int unsigned HW  = $clog2(DHV_P + 1);

  typedef enum logic [2:0] {S_CLEAR, S_COLLECT, S_WALK, S_RD, S_CHK} state_t;
  state_t state;

  logic [QW-1:0] hist_t [DHV_P+1];
  logic [QW-1:0] hist_d [DHV_P+1];
  logic [HW-1:0] s;
  logic [QW-1:0] cnt;
  logic [QW-1:0] t_acc, d_acc, t_nxt, d_nxt;
  logic          in_fire, pass;
  result_t       buf_rdata;

  assign in_ready = (state == S_COLLECT) && (n != '0);
  assign in_fire  = in_valid && in_ready;
  assign t_nxt    = t_acc + hist_t[s];
  assign d_nxt    = d_acc + hist_d[s];

  sdp_ram #(.WIDTH($bits(result_t)), .DEPTH(MAX_Q_P)) u_buf (
    .clk,
    .we(in_fire), .waddr(QAW'(cnt)), .wdata(in_res),
    .re(state == S_RD), .raddr(QAW'(cnt)), .rdata(buf_rdata));

  assign pass      = thr_valid && buf_rdata.m.found && !buf_rdata.m.decoy &&
                     (buf_rdata.m.score >= thr);
  assign out_valid = (state == S_CHK) && pass;
  assign out_res   = buf_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      s         <= '0;
      cnt       <= '0;
      t_acc     <= '0;
      d_acc     <= '0;
      thr       <= '0;
      thr_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_CLEAR: begin
          hist_t[s] <= '0;
          hist_d[s] <= '0;
          if (s == HW'(DHV_P)) begin
            cnt   <= '0;
            state <= S_COLLECT;
          end else s <= s + 1'b1;
        end

        S_COLLECT: if (in_fire) begin
          if (in_res.m.found) begin
            if (in_res.m.decoy) hist_d[HW'(in_res.m.score)] <= hist_d[HW'(in_res.m.score)] + 1'b1;
            else                hist_t[HW'(in_res.m.score)] <= hist_t[HW'(in_res.m.score)] + 1'b1;
          end
          cnt <= cnt + 1'b1;
          if (cnt == n - 1'b1) begin
            s         <= HW'(DHV_P);
            t_acc     <= '0;
            d_acc     <= '0;
            thr_valid <= 1'b0;
            state     <= S_WALK;
          end
        end

        // walk scores downwards; clear the histogram for the next query set
        S_WALK: begin
          t_acc     <= t_nxt;
          d_acc     <= d_nxt;
          hist_t[s] <= '0;
          hist_d[s] <= '0;
          if (t_nxt != '0 && 32'(d_nxt) * 32'd100 <= 32'(t_nxt) * 32'(FDR_PCT)) begin
            thr       <= score_t'(s);
            thr_valid <= 1'b1;
          end
          if (s == '0) begin
            cnt   <= '0;
            state <= S_RD;
          end else s <= s - 1'b1;
        end

        S_RD: state <= S_CHK;

        S_CHK: if (!pass || out_ready) begin
          if (cnt == n - 1'b1) begin
            done  <= 1'b1;
            cnt   <= '0;
            state <= S_COLLECT;
          end else begin
            cnt   <= cnt + 1'b1;
            state <= S_RD;
          end
        end

        default: state <= S_CLEAR;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_res));
`endif
endmodule
