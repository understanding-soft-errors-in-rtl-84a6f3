// error_aggregator: collects the parity error signals of L2C and MCU into the single
// error that starts a QRR recovery.
//
// The signals come from many parity checkers spread over both components, so they are
// combined in two registered levels: level one ORs them in groups of GROUP, level two ORs
// the group results. err_agg therefore rises two cycles after any err_in bit. Because a
// corrupted flip-flop could reach an array or another component in fewer cycles than that,
// err_fast, the unregistered OR of all inputs, is also given; QRR uses it to disable array
// writes, return valids and request acceptance in the same cycle. The grouping and the two
// levels are this design's choices; the need for a fast path is the paper's.
//
// flush clears both levels; it is held while the uncore is in reset so that stale error
// bits do not start a second recovery after the first one.
module error_aggregator #(
  parameter int unsigned N_ERR = 80,
  parameter int unsigned GROUP = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             flush,
  input  logic [N_ERR-1:0] err_in,
  output logic             err_fast,
  output logic             err_agg
);

  localparam int unsigned NG = (N_ERR + GROUP - 1) / GROUP;

  logic [NG*GROUP-1:0] err_pad;
  logic [NG-1:0]       grp_d, grp_q;

  always_comb begin
    err_pad            = '0;
    err_pad[N_ERR-1:0] = err_in;
    for (int g = 0; g < NG; g++) begin
      grp_d[g] = |err_pad[g*GROUP +: GROUP];
    end
  end

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      grp_q   <= '0;
      err_agg <= 1'b0;
    end else begin
      grp_q   <= grp_d;
      err_agg <= |grp_q;
    end
  end

  assign err_fast = |err_in;

endmodule
