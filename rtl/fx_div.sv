// fx_div: the core's single Q20 divider, sequential restoring division.
//
// q = num / den in Q20. A pulse on start latches the operands; the
// quotient magnitude (|num| << 20) / |den| is then built one bit per cycle
// over 52 cycles, the sign applied and the result saturated. done pulses
// for one cycle with q valid, and q holds until the next start; busy is high
// from the cycle after start until done. Division by zero returns the
// saturated value with the sign of num. The core uses it once per training
// step, for the reciprocal 1/(1 + h P h^T) that replaces the k x k matrix
// inverse when the batch size is 1. The algorithm (restoring, 1 bit per
// cycle) is this design's choice.
module fx_div
  import oselm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  num,
  input  fx_t  den,
  output logic busy,
  output logic done,
  output fx_t  q
);
  localparam int unsigned NB = W + FRAC;  // dividend bits, 52

  logic [NB-1:0] dvd;      // remaining dividend bits, shifted out MSB first
  logic [W-1:0]  rem;      // partial remainder, always below |den|
  logic [NB-1:0] quo;      // quotient being built
  logic [W:0]    dmag;     // |den|
  logic          neg;
  logic [5:0]    cnt;

  logic [W:0]    rem_sh;
  logic signed [W:0] num_x, den_x, dabs;
  logic [W-1:0]      nabs;   // |num| fits in W bits, also for the most negative word
  always_comb begin
    num_x  = {num[W-1], num};
    den_x  = {den[W-1], den};
    nabs   = W'(num_x[W] ? -num_x : num_x);
    dabs   = den_x[W] ? -den_x : den_x;
    rem_sh = {rem, dvd[NB-1]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      dvd  <= '0;
      rem  <= '0;
      quo  <= '0;
      dmag <= '0;
      neg  <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        dvd  <= {nabs, {FRAC{1'b0}}};
        dmag <= dabs;
        neg  <= num[W-1] ^ den[W-1];
        rem  <= '0;
        quo  <= '0;
        cnt  <= 6'(NB);
      end else if (busy) begin
        if (dmag == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= num_sign_sat(neg);
        end else if (cnt != 0) begin
          if (rem_sh >= dmag) begin
            rem <= W'(rem_sh - dmag);
            quo <= {quo[NB-2:0], 1'b1};
          end else begin
            rem <= W'(rem_sh);
            quo <= {quo[NB-2:0], 1'b0};
          end
          dvd <= dvd << 1;
          cnt <= cnt - 6'd1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= fx_sat64(neg ? -$signed({12'd0, quo}) : $signed({12'd0, quo}));
        end
      end
    end
  end

  function automatic fx_t num_sign_sat(input logic n);
    return n ? FX_MIN : FX_MAX;
  endfunction
endmodule
