// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// It computes quotient = dividend / divisor and the remainder for the JOIN
// module's threshold update t = W + k/|C|. The FPGA implementation used a
// vendor divider core; this module is a plain replacement that has the same
// function. After a start pulse, busy is high for WIDTH cycles and done
// pulses in the cycle after, WIDTH+1 cycles after start, with the results
// valid (they stay valid until the next start).
// Division by zero returns an all-ones quotient and the dividend as the
// remainder.
module seq_divider #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [WIDTH-1:0] dividend,
  input  logic [WIDTH-1:0] divisor,
  output logic             busy,
  output logic             done,
  output logic [WIDTH-1:0] quotient,
  output logic [WIDTH-1:0] remainder
);
  localparam int unsigned CW = $clog2(WIDTH + 1);

  logic [WIDTH-1:0] d_q;
  logic [CW-1:0]    cnt_q;
  logic [WIDTH+1:0] trial;

  assign trial = {1'b0, remainder, quotient[WIDTH-1]} - {2'b00, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cnt_q     <= '0;
      d_q       <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        cnt_q     <= CW'(WIDTH);
        d_q       <= divisor;
        quotient  <= dividend;
        remainder <= '0;
      end else if (busy) begin
        // shift the next dividend bit into the partial remainder
        if (!trial[WIDTH+1]) begin
          remainder <= trial[WIDTH-1:0];
          quotient  <= {quotient[WIDTH-2:0], 1'b1};
        end else begin
          remainder <= {remainder[WIDTH-2:0], quotient[WIDTH-1]};
          quotient  <= {quotient[WIDTH-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
