// logic_parity_group: a group of W flip-flops protected by logic parity.
//
// The parity bit is predicted from the D inputs when the group loads (one XOR tree on d)
// and stored in an extra flip-flop. Every cycle a second XOR tree over the stored bits and
// the stored parity bit gives err, which rises in the cycle after any single bit of the
// group has flipped and stays up until the group is reloaded or reset. This is how L2C and
// MCU flip-flops are checked before QRR recovers them; the group size W is this design's
// choice.
//
// Interface: clk, synchronous active-high rst (clears data and parity), en loads d.
// seu_flip is an upset hook for fault-injection runs: each set bit inverts the matching
// stored bit in that clock edge while the parity bit keeps its value, exactly as a particle
// strike would. In a product it is tied to zero.
// Timing: q and err are registered outputs of the same edge; err is combinational from
// the stored bits only.
module logic_parity_group #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [W-1:0] d,
  input  logic [W-1:0] seu_flip,
  output logic [W-1:0] q,
  output logic         err
);

  logic par_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      q     <= '0;
      par_q <= 1'b0;
    end else begin
      if (en) begin
        q     <= d ^ seu_flip;
        par_q <= ^d;
      end else begin
        q     <= q ^ seu_flip;
      end
    end
  end

  assign err = (^q) ^ par_q;

endmodule
