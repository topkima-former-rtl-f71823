// topk_counter: counts granted requests and signals Stop Ramp at count = k.
//
// Every grant from the arbiter increments count. stop is high while
// count >= k, the paper's "count equals or exceeds k" condition that ends
// the data conversion early. k is an input so that one macro design can
// hold any sub-top-k share. Increments beyond the counter's range saturate.
//
// Timing: clr and inc act on the rising edge (clr wins); stop is
// combinational from the registered count and k.
module topk_counter #(
  parameter int KMAX = 5,
  parameter int CW   = $clog2(KMAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          inc,
  input  logic [CW-1:0] k,
  output logic [CW-1:0] count,
  output logic          stop
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         count <= '0;
    else if (clr)                       count <= '0;
    else if (inc && count != {CW{1'b1}}) count <= count + 1'b1;
  end

  assign stop = (count >= k);

endmodule
