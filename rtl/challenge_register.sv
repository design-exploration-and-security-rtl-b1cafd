// challenge_register: the 64-bit challenge register of the POP core.
//
// `load` writes the initial challenge `init_chal`; `reload` writes the
// first-layer responses `l1_resp`, so that response bit i becomes challenge
// bit i of the next round. Load has priority. The register clears to zero on
// reset. Both writes take effect at the next rising clock edge.
module challenge_register #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] init_chal,
  input  logic         reload,
  input  logic [W-1:0] l1_resp,
  output logic [W-1:0] chal
);

  always_ff @(posedge clk) begin
    if (!rst_n)
      chal <= '0;
    else if (load)
      chal <= init_chal;
    else if (reload)
      chal <= l1_resp;
  end

endmodule
