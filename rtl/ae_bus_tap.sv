// ae_bus_tap -- input stage of the autoencoder processor.
//
// One event, the vector x of V signed N-bit variables, is presented on x
// with in_valid high. The bus tap registers it once and hands the same
// registered copy to every tree engine and to the distance processor, so
// that all T trees and the distance calculation see one stable,
// time-aligned event. A new event may arrive every clock (interval 1).
//
// Timing: x_q/out_valid follow x/in_valid by one clock. out_valid is reset
// low; x_q keeps its last value when no event is present. The bus tap is
// drawn as the entry point of the processor in the block diagram; that it
// is a single register stage is this design's choice.
module ae_bus_tap #(
  parameter int unsigned V = ae_pkg::V_DEF,
  parameter int unsigned N = ae_pkg::N_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [V-1:0][N-1:0]  x,
  output logic                 out_valid,
  output logic [V-1:0][N-1:0]  x_q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  // Data is captured only with a valid event, so an idle input bus does
  // not toggle the whole fan-out.
  always_ff @(posedge clk) begin
    if (in_valid) x_q <= x;
  end

endmodule
