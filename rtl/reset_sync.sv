// Reset synchroniser: asserts its output reset as soon as the input reset
// is asserted and releases it two clock edges after the input is released,
// in step with the local clock. Used to bring the board reset into the
// pixel-clock domain, which runs from the timing generator's pixel clock.
// This is a standard construction and not described by the paper.
module reset_sync (
  input  logic clk,
  input  logic rst_n_i,
  output logic rst_n_o
);
  logic meta;

  always_ff @(posedge clk or negedge rst_n_i) begin
    if (!rst_n_i) begin
      meta    <= 1'b0;
      rst_n_o <= 1'b0;
    end else begin
      meta    <= 1'b1;
      rst_n_o <= meta;
    end
  end
endmodule
