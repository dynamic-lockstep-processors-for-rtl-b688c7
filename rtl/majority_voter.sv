// majority_voter: picks the input that represents the majority.
//
// Only inputs enabled by the synchronizer take part. With N enabled inputs
// the majority is M = floor(N/2)+1 (N is odd, at least three, so there is
// never a tie). The voter selects the first enabled input, lowest index
// first, whose row of the comparison matrix shows at least M enabled inputs
// equal to it (itself included), and tells the bus multiplexer which one it
// is and which enabled inputs agree with it. If no input reaches M while at
// least one input is enabled, no_majority is raised for the observer. The
// rule "first input equal to at least M of N" is the paper's; index order
// and counting the input itself are this design's reading. Combinational.
module majority_voter #(
  parameter int unsigned N_PORTS = 3,
  localparam int unsigned IW = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic [N_PORTS-1:0] equal [N_PORTS],
  input  logic [N_PORTS-1:0] enabled,
  output logic               sel_valid,
  output logic [IW-1:0]      sel_idx,
  output logic [N_PORTS-1:0] agree,
  output logic               no_majority
);

  localparam int unsigned CW = $clog2(N_PORTS + 1);

  logic [CW-1:0] n_enabled, m_needed;

  always_comb begin
    n_enabled = '0;
    for (int i = 0; i < N_PORTS; i++) n_enabled += CW'(enabled[i]);
    m_needed = (n_enabled >> 1) + CW'(1);

    sel_valid = 1'b0;
    sel_idx   = '0;
    agree     = '0;
    for (int i = 0; i < N_PORTS; i++) begin
      logic [CW-1:0] votes;
      votes = '0;
      for (int j = 0; j < N_PORTS; j++) votes += CW'(enabled[j] && equal[i][j]);
      if (!sel_valid && enabled[i] && votes >= m_needed) begin
        sel_valid = 1'b1;
        sel_idx   = IW'(i);
        agree     = equal[i] & enabled;
      end
    end
    no_majority = (n_enabled != '0) && !sel_valid;
  end

endmodule
