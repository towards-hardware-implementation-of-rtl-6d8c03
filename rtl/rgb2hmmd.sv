// rgb2hmmd -- RGB to HMMD colour-space converter (block A of the extractor).
//
// One pixel at a time is converted into the five HMMD attributes:
//   Max  = max(R,G,B)            Min = min(R,G,B)
//   Diff = Max - Min             Sum = (Max + Min) / 2
//   Hue  = 0                               if Max = Min
//        = 60*(G-B)/(Max-Min)              if Max = R and G >= B
//        = 360 + 60*(G-B)/(Max-Min)        if Max = R and G <  B
//        = 120 + 60*(B-R)/(Max-Min)        if Max = G
//        = 240 + 60*(R-G)/(Max-Min)        otherwise
// Hue is an integer number of degrees; the division truncates toward zero.
//
// The datapath follows the published converter diagram: two comparators
// (Max, Min), subtractors (|Max-Min|, |G-B|, |B-R|, |R-G|), constant
// multipliers by 60, one divider (iterative, in seq_divider), the three
// offset adders (360+, 120+, 240+) and a synch block that releases Sum, Hue,
// Diff, Min and Max together.  Sum's own divide-by-two is a shift.
//
// Interface: in_valid/in_ready handshake on `rgb`; `out_valid` pulses for one
// cycle with `hmmd`, which then holds until the next result.  The converter
// handles one pixel at a time: a pixel accepted on clock edge k has its
// result sampled (out_valid high) on edge k+LATENCY, and in_ready is high
// again in that same cycle, so a pixel can be converted every LATENCY
// cycles.  LATENCY = 29 is the figure stated for the original converter; the
// arithmetic itself needs 20 cycles here, and the synch block waits out the
// rest so the stated timing is kept.  How the stages are split over cycles is
// this design's choice.
module rgb2hmmd
  import csd_pkg::*;
#(
  parameter int unsigned LATENCY = 29
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  rgb_t  rgb,
  output logic  out_valid,
  output hmmd_t hmmd
);

  localparam int unsigned PROD_W = 14;   // 60 * 255 = 15300 < 2^14
  localparam int unsigned CNT_W  = $clog2(LATENCY + 1);
  localparam int unsigned MIN_LATENCY = 6 + PROD_W;

  typedef enum logic [2:0] {S_IDLE, S_CMP, S_SUB, S_MUL, S_DIV, S_ADD, S_SYNC} state_e;
  typedef enum logic [1:0] {H_ZERO, H_RED, H_GREEN, H_BLUE} hcase_e;

  state_e state;
  logic [CNT_W-1:0] cnt;

  rgb_t            px;
  logic [CH_W-1:0] mx, mn, df, sm;
  logic [CH_W:0]   sum_raw;
  hcase_e          hcase;
  logic            neg;                  // sign of the hue numerator
  logic [CH_W-1:0] a_gb, a_br, a_rg;     // |G-B|, |B-R|, |R-G|
  logic            s_gb, s_br, s_rg;     // set when the difference is negative
  logic [PROD_W-1:0] p_num;
  logic [HUE_W-1:0]  hue_r;

  // divider
  logic              div_start, div_busy, div_done;
  logic [PROD_W-1:0] div_q;
  logic [CH_W-1:0]   div_rem;

  seq_divider #(.NUM_W(PROD_W), .DEN_W(CH_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(p_num), .den(df),
    .busy(div_busy), .done(div_done), .quot(div_q), .rem(div_rem)
  );

  assign in_ready = (state == S_IDLE);

  // constant multiplier by 60 = 64 - 4
  function automatic logic [PROD_W-1:0] mul60(input logic [CH_W-1:0] x);
    return (PROD_W'(x) << 6) - (PROD_W'(x) << 2);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      px        <= '0;
      mx        <= '0;
      mn        <= '0;
      df        <= '0;
      sm        <= '0;
      sum_raw   <= '0;
      hcase     <= H_ZERO;
      neg       <= 1'b0;
      a_gb      <= '0;
      a_br      <= '0;
      a_rg      <= '0;
      s_gb      <= 1'b0;
      s_br      <= 1'b0;
      s_rg      <= 1'b0;
      p_num     <= '0;
      hue_r     <= '0;
      div_start <= 1'b0;
      out_valid <= 1'b0;
      hmmd      <= '0;
    end else begin
      div_start <= 1'b0;
      out_valid <= 1'b0;
      if (state != S_IDLE) cnt <= cnt + 1'b1;
      unique case (state)
        S_IDLE: if (in_valid) begin
          px    <= rgb;
          cnt   <= CNT_W'(1);
          state <= S_CMP;
        end
        // two comparators
        S_CMP: begin
          mx <= (px.r >= px.g) ? ((px.r >= px.b) ? px.r : px.b) : ((px.g >= px.b) ? px.g : px.b);
          mn <= (px.r <= px.g) ? ((px.r <= px.b) ? px.r : px.b) : ((px.g <= px.b) ? px.g : px.b);
          state <= S_SUB;
        end
        // subtractors and the Sum adder; the hue case is decided here
        S_SUB: begin
          df      <= mx - mn;
          sum_raw <= {1'b0, mx} + {1'b0, mn};
          s_gb <= px.g < px.b;  a_gb <= (px.g < px.b) ? px.b - px.g : px.g - px.b;
          s_br <= px.b < px.r;  a_br <= (px.b < px.r) ? px.r - px.b : px.b - px.r;
          s_rg <= px.r < px.g;  a_rg <= (px.r < px.g) ? px.g - px.r : px.r - px.g;
          if (mx == mn)        hcase <= H_ZERO;
          else if (mx == px.r) hcase <= H_RED;
          else if (mx == px.g) hcase <= H_GREEN;
          else                 hcase <= H_BLUE;
          state <= S_MUL;
        end
        // multipliers by 60, Sum divider (shift); start the hue divider
        S_MUL: begin
          sm <= sum_raw[CH_W:1];
          unique case (hcase)
            H_RED:   begin p_num <= mul60(a_gb); neg <= s_gb; end
            H_GREEN: begin p_num <= mul60(a_br); neg <= s_br; end
            H_BLUE:  begin p_num <= mul60(a_rg); neg <= s_rg; end
            default: begin p_num <= '0;          neg <= 1'b0; end
          endcase
          if (hcase == H_ZERO) begin
            state <= S_ADD;
          end else begin
            div_start <= 1'b1;
            state     <= S_DIV;
          end
        end
        S_DIV: if (div_done) state <= S_ADD;
        // the three offset adders
        S_ADD: begin
          unique case (hcase)
            H_RED:   hue_r <= neg ? HUE_W'(360) - HUE_W'(div_q) : HUE_W'(div_q);
            H_GREEN: hue_r <= neg ? HUE_W'(120) - HUE_W'(div_q) : HUE_W'(120) + HUE_W'(div_q);
            H_BLUE:  hue_r <= neg ? HUE_W'(240) - HUE_W'(div_q) : HUE_W'(240) + HUE_W'(div_q);
            default: hue_r <= '0;
          endcase
          state <= S_SYNC;
        end
        // synch block: release all five outputs together, LATENCY cycles
        // after the pixel was accepted
        S_SYNC: if (cnt == CNT_W'(LATENCY - 1)) begin
          hmmd.hue  <= hue_r;
          hmmd.max  <= mx;
          hmmd.min  <= mn;
          hmmd.diff <= df;
          hmmd.sum  <= sm;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the remainder of the hue division is not used
  logic unused_rem;
  assign unused_rem = ^{div_rem, div_busy};

  initial begin
    assert (LATENCY >= MIN_LATENCY)
      else $error("rgb2hmmd: LATENCY %0d is below the %0d cycles the datapath needs", LATENCY, MIN_LATENCY);
  end

  // the divider never sees a zero divisor
  assert property (@(posedge clk) disable iff (!rst_n) div_start |-> df != '0);

endmodule
