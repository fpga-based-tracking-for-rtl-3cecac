// delay_pipe: N-stage register pipeline with a valid bit, used to pad each processing
// step so that its first write lands exactly its step latency after START.
// Valid resets to 0; data is not reset.
module delay_pipe #(
  parameter int unsigned W = 8,
  parameter int unsigned N = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  logic [N-1:0]        v;
  logic [N-1:0][W-1:0] d;
  always_ff @(posedge clk) begin
    if (rst) v <= '0;
    else     v <= {v[N-2:0], in_valid};
    d <= {d[N-2:0], in_data};
  end
  assign out_valid = v[N-1];
  assign out_data  = d[N-1];
  initial assert (N >= 2) else $error("delay_pipe: N must be at least 2");
endmodule
