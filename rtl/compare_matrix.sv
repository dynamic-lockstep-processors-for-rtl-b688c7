// compare_matrix: pairwise comparison of the lockstep bus inputs.
//
// Every plsb request is compared with every other one and the result is the
// N_PORTS x N_PORTS matrix equal[i][j] (symmetric, diagonal set). The matrix
// is the interface to the majority voter, as in the monitor's architecture.
// Which fields take part is this design's choice: two ports that are both
// idle (no read, no write) are equal whatever they leave on address and data;
// otherwise read, write, address and byteenable must match, and writedata
// must match for a write. Purely combinational.
module compare_matrix
  import lsm_pkg::*;
#(
  parameter int unsigned N_PORTS = 3
) (
  input  av_req_t                   req   [N_PORTS],
  output logic    [N_PORTS-1:0]     equal [N_PORTS]
);

  function automatic logic same(av_req_t a, av_req_t b);
    logic a_idle, b_idle;
    a_idle = !a.read && !a.write;
    b_idle = !b.read && !b.write;
    if (a_idle || b_idle) return a_idle && b_idle;
    return (a.read == b.read) && (a.write == b.write) &&
           (a.address == b.address) && (a.byteenable == b.byteenable) &&
           (!a.write || (a.writedata == b.writedata));
  endfunction

  always_comb begin
    for (int i = 0; i < N_PORTS; i++)
      for (int j = 0; j < N_PORTS; j++)
        equal[i][j] = (i == j) ? 1'b1 : same(req[i], req[j]);
  end

endmodule
