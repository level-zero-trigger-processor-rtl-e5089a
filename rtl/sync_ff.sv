// sync_ff: multi-flip-flop synchronizer bringing a level signal (start/end of
// burst, choke, error, NIM calibration) into the clock domain of clk.
// STAGES flip-flops in a row; the output lags the input by STAGES clocks.
module sync_ff #(
  parameter int STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic [STAGES-1:0] sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= '0;
    else        sr <= {sr[STAGES-2:0], d};
  end
  assign q = sr[STAGES-1];
endmodule
