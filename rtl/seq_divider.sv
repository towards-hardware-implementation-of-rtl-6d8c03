// seq_divider -- iterative unsigned restoring divider.
//
// Computes quot = num / den and rem = num % den, one quotient bit per clock,
// most significant bit first.  A one-cycle `start` loads the operands (only
// accepted while `busy` is low).  If start is sampled on clock edge k, done
// is high for the one cycle after edge k+NUM_W, when quot and rem are valid;
// they hold until the next start.
// Division by zero gives an all-ones quotient; callers here never divide by
// zero.
// It is the "Divider" of the RGB-to-HMMD converter and also serves the bin
// value normaliser; the restoring algorithm is this design's choice.
module seq_divider #(
  parameter int unsigned NUM_W = 16,
  parameter int unsigned DEN_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quot,
  output logic [DEN_W-1:0] rem
);

  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [NUM_W-1:0] q;       // dividend bits shift out, quotient bits shift in
  logic [DEN_W:0]   r;       // partial remainder, one bit wider than den
  logic [DEN_W-1:0] d;
  logic [CNT_W-1:0] cnt;

  logic [DEN_W:0]   r_shift;
  logic [DEN_W+1:0] r_try;

  always_comb begin
    r_shift = {r[DEN_W-1:0], q[NUM_W-1]};
    r_try   = {1'b0, r_shift} - {2'b00, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q    <= '0;
      r    <= '0;
      d    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        q    <= num;
        r    <= '0;
        d    <= den;
        cnt  <= CNT_W'(NUM_W);
        busy <= 1'b1;
      end else if (busy) begin
        if (r_try[DEN_W+1]) begin          // negative: restore
          r <= r_shift;
          q <= {q[NUM_W-2:0], 1'b0};
        end else begin
          r <= r_try[DEN_W:0];
          q <= {q[NUM_W-2:0], 1'b1};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quot = q;
  assign rem  = r[DEN_W-1:0];

endmodule
