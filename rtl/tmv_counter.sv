// tmv_counter: temporal majority voting for one PUF.
//
// The PUF is evaluated n times; this counter adds up the ones it returns and
// reports the most frequent response. `clr` empties the counter, `sample`
// adds the PUF response `r_in` (one per evaluation). `maj` is 1 when the
// ones outnumber the zeros among the n evaluations, i.e. 2*count > n; with
// an even n a tie reads as 0. n = 1 is an ordinary single evaluation.
//
// The 24-bit width follows the testchip; the counter saturates instead of
// wrapping. Clear has priority over sample. maj is combinational from the
// registered count, so it is valid the cycle after the last sample.
// Synchronous active-low reset.
module tmv_counter #(
  parameter int unsigned CNT_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             sample,
  input  logic             r_in,
  input  logic [CNT_W-1:0] n,
  output logic [CNT_W-1:0] count,
  output logic             maj
);

  always_ff @(posedge clk) begin
    if (!rst_n || clr)
      count <= '0;
    else if (sample && r_in && count != {CNT_W{1'b1}})
      count <= count + 1'b1;
  end

  // 2*count > n without overflow.
  always_comb maj = {1'b0, count, 1'b0} > {2'b00, n};

endmodule
