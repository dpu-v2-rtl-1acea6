// pipe_delay: the control-signal pipeline.
//
// A chain of DEPTH registers that carries a WIDTH-bit control word (or data
// word) from the decode stage to the pipeline stage that consumes it, so that
// each stage of the datapath sees the fields of the instruction it is
// currently processing. DEPTH = 0 is a plain wire. Reset clears all stages,
// which makes a reset pipeline equivalent to one filled with no-operations.
// The paper names this "pipelining of control signals"; its structure here is
// the simplest one that does the job.
module pipe_delay #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end

endmodule
