// softmax_unit: row-wise Softmax of the quantization processor.
//
// The paper lists Softmax among the activation functions of the processor
// (generated there by high-level synthesis) and quantizes its output, the
// attention probabilities, with LNQ; it does not say how Softmax is computed.
// This unit is the simplest exact-in-structure implementation:
//   COLLECT  stores the N values of one row (Q16.16) with their output
//            addresses and tracks the row maximum m,
//   EXP      forms e_i = 2^t, t = (x_i - m) * log2(e) <= 0, as
//            2^-k * p(f) with t = -k + f, f in [0,1), and
//            p(f) = 1 + f*(0.6602 + 0.3398 f) (error below 0.25 %),
//            stores e_i (unsigned Q1.16) and sums them,
//   DIV      computes 1/sum by restoring division, one quotient bit per cycle,
//   EMIT     sends p_i = e_i / sum (Q16.16) with the stored address.
// Subtracting the maximum keeps every e_i in (0, 1] and the sum in [1, N].
// A row of up to N values (one tile, N = LANES) is handled in one go
// (pass = SM_ROW). Longer rows, spread over several tiles, take two passes
// over their tiles, selected per tile by 'pass':
//   SM_STAT_FIRST / SM_STAT_NEXT  compute the tile's max and sum and merge
//            them into a running row maximum M and sum S (MERGE state:
//            S = S*e^(M-M') + s_tile*e^(m_tile-M'), M' = max(M, m_tile));
//            the values themselves are passed out unchanged,
//   SM_NORM  exponentiates against the stored M and divides by the stored S.
// Rows may have up to MAXROW values. The exponent polynomial, base-2
// formulation, sequential divider and the two-pass scheme for long rows are
// this design's choices.
//
// Interface: in_valid/in_x/in_dest stream in one row (exactly N values);
// out_valid/out_y/out_dest stream out N probabilities in arrival order.
// Timing: after the N-th input, N cycles of EXP, 34 cycles of DIV, then one
// output per cycle: the first output appears N + 36 cycles after the cycle
// that presents the last input, the row's last output 2N + 35 cycles after it
// (SM_ROW and SM_NORM). The statistics passes replace DIV by one MERGE cycle:
// first output N + 3 cycles after the last input. One row at a time:
// inputs arriving while a row is processed are not accepted (the controller
// sends a new tile only after the previous one is written).
module softmax_unit
  import ahcq_pkg::*;
#(
  parameter int unsigned N = 128,
  parameter int unsigned MAXROW = 4096,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sm_pass_e                pass,
  input  logic                    in_valid,
  input  logic signed [FX_W-1:0]  in_x,
  input  logic [CH_W-1:0]         in_dest,
  output logic                    out_valid,
  output logic signed [FX_W-1:0]  out_y,
  output logic [CH_W-1:0]         out_dest,
  output logic                    busy
);

  localparam logic [16:0] LOG2E = 17'd94548;       // log2(e), Q1.16
  localparam int          EW    = 17;              // e_i: Q1.16
  localparam int          SW    = EW + $clog2(MAXROW) + 1;   // sum of a row's e_i

  typedef enum logic [2:0] {COLLECT, EXP, MERGE, DIV, EMIT} st_e;
  st_e st;

  logic signed [FX_W-1:0] xbuf [N];
  logic [CH_W-1:0]        dbuf [N];
  logic [EW-1:0]          ebuf [N];
  logic [NW-1:0]          idx;
  logic signed [FX_W-1:0] mx;
  logic [SW-1:0]          sum;
  logic [5:0]             dcnt;
  logic [SW+16:0]         rem;
  logic [16:0]            recip;                   // 1/sum, Q1.16 (sum >= 1)

  // ---- exponential: e^d for d <= 0 (Q16.16 in, Q1.16 out) ----
  function automatic logic [EW-1:0] expneg(input logic signed [FX_W:0] d);
    logic signed [63:0] t64;
    logic [31:0]        tneg;                      // -t, Q16.16, >= 0
    logic [15:0]        kint, f;                   // t = -kint + f, f in [0,1)
    logic [33:0]        p;
    t64  = (64'(d) * 64'(signed'({1'b0, LOG2E}))) >>> FX_FRAC;
    tneg = (-t64 > 64'sd2147483647) ? 32'h7fffffff : 32'(-t64);
    if (tneg[15:0] == 16'd0) begin
      kint = tneg[31:16];
      f    = 16'd0;
    end else begin
      kint = tneg[31:16] + 16'd1;
      f    = 16'(17'h10000 - {1'b0, tneg[15:0]});
    end
    // 2^f ~ 1 + f*(0.6602 + 0.3398 f), Q.32 intermediate
    p = 34'((64'd43266 + ((64'(f) * 64'd22270) >> 16)) * 64'(f)) + (34'd1 << 32);
    return (kint > 16'd17) ? '0 : EW'((p >> 16) >> kint);
  endfunction

  logic signed [FX_W-1:0] gmax;                    // running row maximum M
  logic [SW-1:0]          gsum;                    // running row sum S, Q.16
  logic signed [FX_W-1:0] mref;
  logic [EW-1:0]          e, e_old, e_new;
  logic [SW-1:0]          div_by;

  assign mref   = (pass == SM_NORM) ? gmax : mx;
  assign e      = expneg((FX_W+1)'(xbuf[idx]) - (FX_W+1)'(mref));
  // MERGE factors: the older and the newer part, scaled to the larger maximum
  assign e_old  = (mx > gmax) ? expneg((FX_W+1)'(gmax) - (FX_W+1)'(mx)) : EW'(17'h10000);
  assign e_new  = (mx > gmax) ? EW'(17'h10000) : expneg((FX_W+1)'(mx) - (FX_W+1)'(gmax));
  assign div_by = (pass == SM_NORM) ? gsum : sum;

  logic [SW+16:0] r2;
  assign r2 = {rem[SW+15:0], (dcnt == 6'd0)};
  logic [SW+EW-1:0] m_old, m_new;
  assign m_old = (SW+EW)'(gsum) * (SW+EW)'(e_old);
  assign m_new = (SW+EW)'(sum) * (SW+EW)'(e_new);

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= COLLECT;
      idx       <= '0;
      mx        <= '0;
      sum       <= '0;
      dcnt      <= '0;
      rem       <= '0;
      recip     <= '0;
      gmax      <= '0;
      gsum      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        COLLECT: if (in_valid) begin
          xbuf[idx] <= in_x;
          dbuf[idx] <= in_dest;
          mx  <= (idx == '0 || in_x > mx) ? in_x : mx;
          if (idx == NW'(N - 1)) begin
            idx <= '0;
            sum <= '0;
            st  <= EXP;
          end else begin
            idx <= idx + NW'(1);
          end
        end
        EXP: begin
          ebuf[idx] <= e;
          sum <= sum + SW'(e);
          if (idx == NW'(N - 1)) begin
            idx  <= '0;
            dcnt <= '0;
            rem  <= '0;
            st   <= (pass == SM_STAT_FIRST || pass == SM_STAT_NEXT) ? MERGE : DIV;
          end else begin
            idx <= idx + NW'(1);
          end
        end
        MERGE: begin
          if (pass == SM_STAT_FIRST) begin
            gmax <= mx;
            gsum <= sum;
          end else begin
            gmax <= (mx > gmax) ? mx : gmax;
            gsum <= SW'(m_old >> 16) + SW'(m_new >> 16);
          end
          st <= EMIT;
        end
        DIV: begin
          // restoring division of 2^32 by sum (Q.16) gives 1/sum in Q1.16;
          // the 33 numerator bits enter MSB first, one per cycle
          if (dcnt < 6'd33) begin
            if (r2 >= (SW+17)'(div_by)) begin
              rem   <= r2 - (SW+17)'(div_by);
              recip <= {recip[15:0], 1'b1};
            end else begin
              rem   <= r2;
              recip <= {recip[15:0], 1'b0};
            end
            dcnt <= dcnt + 6'd1;
          end else begin
            st <= EMIT;
          end
        end
        EMIT: begin
          out_valid <= 1'b1;
          out_y     <= (pass == SM_STAT_FIRST || pass == SM_STAT_NEXT) ? xbuf[idx] :
                       FX_W'((64'(ebuf[idx]) * 64'(recip)) >> 16);
          out_dest  <= dbuf[idx];
          if (idx == NW'(N - 1)) begin
            idx <= '0;
            st  <= COLLECT;
          end else begin
            idx <= idx + NW'(1);
          end
        end
        default: st <= COLLECT;
      endcase
    end
  end

  assign busy = (st != COLLECT) || (idx != '0);

endmodule
