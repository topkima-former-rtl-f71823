// topk_register: result registers of the top-k selection.
//
// Each grant writes the encoded column address and the ramp conversion cycle
// at which that column crossed (0 = first ramp pulse) into entry slot, the
// number of earlier grants. Entries therefore come out sorted from the
// largest MAC value down. The stored cycle is the ADC output, as in the
// paper; the code is 2^ADC_BITS-1-cycle.
//
// Timing: clr and we act on the rising edge; outputs are the registers.
module topk_register #(
  parameter int K      = 3,
  parameter int ADDR_W = 8,
  parameter int CYC_W  = 5,
  parameter int SW     = $clog2(K + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       we,
  input  logic [SW-1:0]              slot,
  input  logic [ADDR_W-1:0]          addr,
  input  logic [CYC_W-1:0]           cyc,
  output logic [K-1:0]               out_valid,
  output logic [K-1:0][ADDR_W-1:0]   out_addr,
  output logic [K-1:0][CYC_W-1:0]    out_cyc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_addr  <= '0;
      out_cyc   <= '0;
    end else if (clr) begin
      out_valid <= '0;
      out_addr  <= '0;
      out_cyc   <= '0;
    end else if (we) begin
      for (int i = 0; i < K; i++) begin
        if (int'(slot) == i) begin
          out_valid[i] <= 1'b1;
          out_addr[i]  <= addr;
          out_cyc[i]   <= cyc;
        end
      end
    end
  end

endmodule
