// odrg_voter: bit-wise triple majority voter with per-core fault detectors.
//
// Every bit of the output is the 2-of-3 majority of the three inputs. Each
// detector compares one core's bundle with the voted bundle; mismatch_o[i]
// is high in any cycle in which core i disagrees in at least one bit. Purely
// combinational. Per-bit voting and the detectors comparing against the
// voted value follow the described ODRG voter; the bundle width is a
// parameter (the cluster uses the packed core output struct).
module odrg_voter #(
  parameter int unsigned WIDTH = odrg_pkg::CoreOutW
) (
  input  logic [WIDTH-1:0] in_a_i,
  input  logic [WIDTH-1:0] in_b_i,
  input  logic [WIDTH-1:0] in_c_i,
  output logic [WIDTH-1:0] voted_o,
  output logic [2:0]       mismatch_o
);
  always_comb begin
    voted_o       = (in_a_i & in_b_i) | (in_a_i & in_c_i) | (in_b_i & in_c_i);
    mismatch_o[0] = |(in_a_i ^ voted_o);
    mismatch_o[1] = |(in_b_i ^ voted_o);
    mismatch_o[2] = |(in_c_i ^ voted_o);
  end
endmodule
