// delay_line: a W-bit shift register of D stages (D = 0 is a wire). Used for
// the input skew of the Gram-matrix systolic array. Reset clears every stage.
module delay_line #(
  parameter int unsigned W = 1,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < int'(D); k++) stage[k] <= '0;
      end else begin
        stage[0] <= d;
        for (int k = 1; k < int'(D); k++) stage[k] <= stage[k-1];
      end
    end
    assign q = stage[D-1];
  end

endmodule
