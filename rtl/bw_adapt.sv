// bw_adapt: prefetch bandwidth adaptation at the compute node.
//
// The block watches demand latency and throttles DRAM cache prefetches when
// FAM looks congested. Event counters run during a sampling period of
// SAMPLE_CYCLES cycles: demand requests issued to FAM, demand requests
// returned from FAM (with the sum of their latencies), demand requests
// arriving at the prefetcher, prefetch requests issued, and useful
// prefetches (demands served by the DRAM cache). At the start of each period
// the instantaneous values are taken and cleared and an exponential moving
// average (weight 1/2^EMA_SHIFT) of each is updated. The minimum demand
// latency is the lowest moving-average latency seen in the last MIN_WINDOW
// periods.
//
// Once per period (multiplicative increase, multiplicative decrease):
//   cur = latency sum / demands returned in the period
//   if cur > THRESH_Q8/256 * min  (congestion):
//       diff = (cur - min) / min                      (Q8, at most 1.0)
//       acc  = useful prefetches / prefetches issued  (Q8, at most 1.0)
//       f    = diff * (1 - acc), clamped to [FMIN_Q8, FMAX_Q8] / 256
//       rate = rate * (1 - f)
//   else rate = rate * (1 + 1/2^INC_SHIFT)                  (x 1.125)
//   rate is kept in [RATE_MIN_Q8, DEGREE] prefetches per demand (Q8.8).
// Then prefetch-per-demand (floor of rate), demand-per-prefetch
// (floor of 1/rate, as 256 / rate_q8) and "prefetch greater than demand" (rate >= 1) are
// recomputed. The divisions share one serial divider, so a period's update
// takes about 140 cycles; the counters keep counting meanwhile.
//
// Issue gating (pf_allow, combinational): with rate >= 1 every demand that
// triggers the prefetcher grants prefetch-per-demand prefetches; with
// rate < 1 one prefetch is granted every demand-per-prefetch demands. Each
// granted prefetch that issues (pf_req && pf_allow) uses one grant. With
// adapt_en low every prefetch is allowed.
//
// Following the paper: the event counters with instantaneous and average
// values, per-period execution, minimum latency as the lowest recent
// average, MIMD with increase 1.125, decrease growing linearly with the
// latency excess and shrinking with prefetch accuracy, the 125% threshold,
// and the three quantities of its flowchart. The paper's flowchart prints
// 1.30 while its text twice gives 125%; the text is followed (THRESH_Q8 = 320).
// This design's own choices: the period length, EMA weight, window, the
// exact decrease formula and its clamps, grant-based issue gating.
module bw_adapt #(
  parameter int unsigned SAMPLE_CYCLES = 4096,
  parameter int unsigned DEGREE        = 4,
  parameter int unsigned EMA_SHIFT     = 3,
  parameter int unsigned MIN_WINDOW    = 16,
  parameter int unsigned THRESH_Q8     = 320,
  parameter int unsigned INC_SHIFT     = 3,
  parameter int unsigned FMIN_Q8       = 16,
  parameter int unsigned FMAX_Q8       = 128,
  parameter int unsigned RATE_MIN_Q8   = 16,
  parameter int unsigned LAT_W         = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             adapt_en,
  // events
  input  logic             ev_demand_total,
  input  logic             ev_demand_issued,
  input  logic             ev_demand_returned,
  input  logic [LAT_W-1:0] ret_latency,
  input  logic             ev_pf_issued,
  input  logic             ev_pf_useful,
  // gating
  input  logic             demand_trigger,
  input  logic             pf_req,
  output logic             pf_allow,
  // state
  output logic [15:0]      rate_q8,
  output logic             pf_gt_dm,
  output logic [15:0]      pf_per_dm,
  output logic [15:0]      dm_per_pf,
  output logic [LAT_W-1:0] cur_lat,
  output logic [LAT_W-1:0] min_lat,
  output logic [31:0]      periods,
  output logic [31:0]      decreases,
  output logic [31:0]      increases
);
  localparam logic [15:0] RATE_MAX = 16'(DEGREE * 256);

  // ------------------------------------------------------------ counters
  logic [31:0] c_lat_sum, c_dm_ret, c_dm_iss, c_dm_tot, c_pf_iss, c_pf_use;
  logic [31:0] s_lat_sum, s_dm_ret, s_pf_iss, s_pf_use;
  logic [31:0] e_dm_ret, e_dm_iss, e_dm_tot, e_pf_iss;   // moving averages
  logic [LAT_W-1:0] e_lat;
  logic             e_lat_ok;
  logic [$clog2(SAMPLE_CYCLES)-1:0] tick;
  logic [$clog2(MIN_WINDOW)-1:0]    win;
  logic sample;
  assign sample = (tick == '1);

  function automatic logic [31:0] ema(logic [31:0] avg, logic [31:0] inst);
    return avg - (avg >> EMA_SHIFT) + (inst >> EMA_SHIFT);
  endfunction

  // ------------------------------------------------------------ divider
  logic        d_start, d_done;
  logic        d_busy;   // the launched flag already tracks the divider
  logic [31:0] d_a, d_b, d_q;
  seq_divider #(.W(32)) u_div (
    .clk, .rst_n, .start(d_start), .dividend(d_a), .divisor(d_b),
    .busy(d_busy), .done(d_done), .quotient(d_q));

  typedef enum logic [2:0] {S_RUN, S_LAT, S_DIFF, S_ACC, S_DPP} state_e;
  state_e state;
  logic   launched;
  logic [15:0] diff_q8;
  logic [LAT_W-1:0] lat_now, min_now, e_lat_new;

  always_comb begin
    d_a = '0; d_b = 32'd1;
    case (state)
      S_LAT:  begin d_a = s_lat_sum;                        d_b = s_dm_ret; end
      S_DIFF: begin d_a = 32'(cur_lat - min_lat) << 8;      d_b = 32'(min_lat); end
      S_ACC:  begin d_a = s_pf_use << 8;                    d_b = s_pf_iss; end
      S_DPP:  begin d_a = 32'd256;                          d_b = 32'(rate_q8); end
      default: ;
    endcase
    d_start = (state != S_RUN) && !launched;
    lat_now = (d_q > 32'((1 << LAT_W) - 1)) ? '1 : LAT_W'(d_q);
    e_lat_new = e_lat_ok ? LAT_W'(ema(32'(e_lat), 32'(lat_now))) : lat_now;
    min_now = (!e_lat_ok || win == '0 || e_lat_new < min_lat) ? e_lat_new : min_lat;
  end

  // decrease factor and new rate
  logic [15:0] acc_q8, f_q8, f_raw;
  logic [31:0] dec_amt;
  always_comb begin
    acc_q8 = (s_pf_iss == 0) ? 16'd0 : ((d_q > 32'd256) ? 16'd256 : 16'(d_q));
    f_raw  = 16'((32'(diff_q8) * (32'd256 - 32'(acc_q8))) >> 8);
    f_q8   = (f_raw < 16'(FMIN_Q8)) ? 16'(FMIN_Q8) : (f_raw > 16'(FMAX_Q8)) ? 16'(FMAX_Q8) : f_raw;
    dec_amt = (32'(rate_q8) * 32'(f_q8)) >> 8;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick <= '0; win <= '0; state <= S_RUN; launched <= 1'b0;
      c_lat_sum <= '0; c_dm_ret <= '0; c_dm_iss <= '0; c_dm_tot <= '0; c_pf_iss <= '0; c_pf_use <= '0;
      s_lat_sum <= '0; s_dm_ret <= '0; s_pf_iss <= '0; s_pf_use <= '0;
      e_dm_ret <= '0; e_dm_iss <= '0; e_dm_tot <= '0; e_pf_iss <= '0; e_lat <= '0; e_lat_ok <= 1'b0;
      rate_q8 <= RATE_MAX; pf_gt_dm <= 1'b1; pf_per_dm <= 16'(DEGREE); dm_per_pf <= 16'd0;
      cur_lat <= '0; min_lat <= '0; diff_q8 <= '0;
      periods <= '0; decreases <= '0; increases <= '0;
    end else begin
      tick <= tick + 1'b1;
      if (sample) begin
        // scan and reset the instantaneous values
        s_lat_sum <= c_lat_sum + (ev_demand_returned ? 32'(ret_latency) : 32'd0);
        s_dm_ret  <= c_dm_ret + 32'(ev_demand_returned);
        s_pf_iss  <= c_pf_iss + 32'(ev_pf_issued);
        s_pf_use  <= c_pf_use + 32'(ev_pf_useful);
        e_dm_ret  <= ema(e_dm_ret, c_dm_ret);
        e_dm_iss  <= ema(e_dm_iss, c_dm_iss);
        e_dm_tot  <= ema(e_dm_tot, c_dm_tot);
        e_pf_iss  <= ema(e_pf_iss, c_pf_iss);
        c_lat_sum <= '0; c_dm_ret <= '0; c_dm_iss <= 32'(ev_demand_issued);
        c_dm_tot  <= 32'(ev_demand_total); c_pf_iss <= '0; c_pf_use <= '0;
        periods   <= periods + 1'b1;
        if (state == S_RUN) state <= S_LAT;
      end else begin
        if (ev_demand_returned) begin
          c_lat_sum <= c_lat_sum + 32'(ret_latency);
          c_dm_ret  <= c_dm_ret + 1'b1;
        end
        if (ev_demand_issued) c_dm_iss <= c_dm_iss + 1'b1;
        if (ev_demand_total)  c_dm_tot <= c_dm_tot + 1'b1;
        if (ev_pf_issued)     c_pf_iss <= c_pf_iss + 1'b1;
        if (ev_pf_useful)     c_pf_use <= c_pf_use + 1'b1;
      end

      if (d_start) launched <= 1'b1;
      if (d_done) begin
        launched <= 1'b0;
        case (state)
          S_LAT: begin
            if (s_dm_ret == 0) begin
              // no demand returned: nothing congested, increase
              rate_q8   <= (rate_q8 + (rate_q8 >> INC_SHIFT) > RATE_MAX) ? RATE_MAX
                           : rate_q8 + (rate_q8 >> INC_SHIFT);
              increases <= increases + 1'b1;
              state     <= S_DPP;
            end else begin
              cur_lat  <= lat_now;
              e_lat    <= e_lat_new;
              e_lat_ok <= 1'b1;
              min_lat  <= min_now;
              win      <= (win == ($clog2(MIN_WINDOW))'(MIN_WINDOW - 1)) ? '0 : win + 1'b1;
              // congestion test against the minimum that includes this period
              if (32'(lat_now) * 32'd256 > 32'(THRESH_Q8) * 32'(min_now))
                state <= S_DIFF;
              else begin
                rate_q8   <= (rate_q8 + (rate_q8 >> INC_SHIFT) > RATE_MAX) ? RATE_MAX
                             : rate_q8 + (rate_q8 >> INC_SHIFT);
                increases <= increases + 1'b1;
                state     <= S_DPP;
              end
            end
          end
          S_DIFF: begin
            diff_q8 <= (d_q > 32'd256) ? 16'd256 : 16'(d_q);
            state   <= S_ACC;
          end
          S_ACC: begin
            rate_q8   <= (32'(rate_q8) - dec_amt < 32'(RATE_MIN_Q8)) ? 16'(RATE_MIN_Q8)
                         : 16'(32'(rate_q8) - dec_amt);
            decreases <= decreases + 1'b1;
            state     <= S_DPP;
          end
          S_DPP: begin
            pf_gt_dm  <= (rate_q8 >= 16'd256);
            pf_per_dm <= rate_q8 >> 8;
            dm_per_pf <= (d_q > 32'hFFFF) ? 16'hFFFF : 16'(d_q);
            state     <= S_RUN;
          end
          default: state <= S_RUN;
        endcase
      end
    end
  end

  // ------------------------------------------------------------ grants
  logic [15:0] credit, dcount;
  assign pf_allow = !adapt_en || (credit != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit <= '0; dcount <= '0;
    end else begin
      if (demand_trigger) begin
        if (pf_gt_dm) begin
          credit <= pf_per_dm;
        end else if (dcount + 1'b1 >= dm_per_pf) begin
          credit <= 16'd1;
          dcount <= '0;
        end else begin
          credit <= (pf_req && pf_allow && credit != 0) ? credit - 1'b1 : credit;
          dcount <= dcount + 1'b1;
        end
      end else if (pf_req && pf_allow && credit != 0) begin
        credit <= credit - 1'b1;
      end
    end
  end
endmodule
