// delay_register: fixed-length delay line for the bitstream.
//
// A chain of D registers, each W bits wide, that advance together on every
// enabled clock. The output is the input of D enabled clocks earlier
// (D = 0 makes it a wire). In the frame synchronizer it holds the stream
// back by the latency of the correlation and decision pipeline, so that the
// payload bits are still at hand when the detection that points at them
// comes out. Asynchronous active-low reset clears all stages.
//
// The paper states that payload capture is done with a delay register; its
// depth follows from this design's pipeline, and the rest is its own choice.
module delay_register #(
  parameter int unsigned W = fsync_pkg::WINDOW_DEFAULT,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_chain
    logic [W-1:0] stage [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(D); i++) stage[i] <= '0;
      end else if (en) begin
        stage[0] <= d;
        for (int i = 1; i < int'(D); i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[D-1];
  end

endmodule
