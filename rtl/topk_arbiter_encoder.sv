// topk_arbiter_encoder: AER-style arbiter and address encoder.
//
// The latched sense-amplifier outputs are requests. When en is high (one
// arbitration slot) the lowest-numbered requesting column wins: its ack bit
// goes high for that cycle, valid is set and addr carries its binary column
// number. Serving requests one at a time in address order is what gives the
// paper's tie rule, preference to smaller column addresses, when more
// columns cross the ramp in one step than there are free top-k places.
// The fixed-priority scheme is this design's choice; the paper gives only
// the function.
//
// Interface: combinational; the caller registers addr and applies ack.
module topk_arbiter_encoder #(
  parameter int N = 256
) (
  input  logic [N-1:0]         req,
  input  logic                 en,
  output logic [N-1:0]         ack,
  output logic                 valid,
  output logic [$clog2(N)-1:0] addr
);

  always_comb begin
    ack   = '0;
    valid = 1'b0;
    addr  = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        valid = 1'b1;
        addr  = $clog2(N)'(i);
      end
    end
    if (en && valid) ack[addr] = 1'b1;
    valid = valid && en;
  end

endmodule
