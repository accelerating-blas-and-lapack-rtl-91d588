// pipe_delay: a chain of STAGES registers with a valid bit.
//
// Every arithmetic pipeline of the PE computes its result in one block of
// logic and then carries it through this chain, so the pipeline depth is a
// parameter that can be swept while throughput stays at one result per clock.
// A value presented with in_valid in cycle t appears with out_valid in cycle
// t+STAGES. Valid bits reset to 0; data registers are not reset.
module pipe_delay #(
  parameter int unsigned WIDTH  = 64,
  parameter int unsigned STAGES = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data
);
  logic [STAGES-1:0]            v_q;
  logic [STAGES-1:0][WIDTH-1:0] d_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else begin
      v_q[0] <= in_valid;
      for (int i = 1; i < STAGES; i++) v_q[i] <= v_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    d_q[0] <= in_data;
    for (int i = 1; i < STAGES; i++) d_q[i] <= d_q[i-1];
  end

  assign out_valid = v_q[STAGES-1];
  assign out_data  = d_q[STAGES-1];

  initial assert (STAGES >= 1) else $error("pipe_delay: STAGES must be at least 1");
endmodule
