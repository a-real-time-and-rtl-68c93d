// decimator: down-sampling of the channel-selection input by FACTOR.
//
// Of every FACTOR consecutive valid input samples the first is passed on
// (registered, one cycle later) and the rest are dropped, so a 66-sample
// batch of the channel-selection CNN spans 660 raw samples. The paper gives
// the factor of 10; it does not mention a filter before decimation, and none
// is built here.
module decimator
  import dsd_pkg::*;
#(
  parameter int unsigned FACTOR = 10,
  localparam int unsigned CW = (FACTOR > 1) ? $clog2(FACTOR) : 1
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  act_t  in_data,
  output logic  out_valid,
  output act_t  out_data
);
  logic [CW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && (phase == '0);
      if (in_valid) begin
        if (phase == '0) out_data <= in_data;
        phase <= (phase == CW'(FACTOR - 1)) ? '0 : phase + 1'b1;
      end
    end
  end
endmodule
