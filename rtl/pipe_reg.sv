// pipe_reg: one pipeline stage on a valid/ready channel.
//
// Holds one item; accepts a new one whenever it is empty or its item leaves in the
// same cycle, so a stream passes at full throughput with one cycle of latency.  Used
// for the pipelined outgoing and incoming remote ports of the L1 interconnect.
// Helper of this design; the paper only says such ports "can be pipelined".
module pipe_reg #(
  parameter type T = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);
  logic valid_q;
  T     data_q;

  assign ready_o = !valid_q || ready_i;
  assign valid_o = valid_q;
  assign data_o  = data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      data_q  <= '0;
    end else if (ready_o) begin
      valid_q <= valid_i;
      if (valid_i) data_q <= data_i;
    end
  end
endmodule
