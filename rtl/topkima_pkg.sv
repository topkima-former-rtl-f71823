// topkima_pkg: types and constants shared by the top-k in-memory ADC macro.
//
// A K^T weight is a 4-bit sign-magnitude number (-7..+7). The array holds it
// in three ternary dual-10T cells whose word-line pulses are 1x, 2x and 4x
// wide, so the cell values add up with binary weights. One ternary cell is
// the pair of storage nodes {QL, QR}: +1 = (H,L), 0 = (L,L), -1 = (L,H).
// The ramp ADC has 5 bits: 32 calibration replica cells and 32 ramp replica
// cells per column. These values follow the paper; the package itself is
// this design's way of sharing them.
package topkima_pkg;

  localparam int ADC_BITS         = 5;
  localparam int N_CAL            = 32;   // calibration replica cells per column
  localparam int N_RAMP           = 32;   // ramp replica cells per column (2^ADC_BITS)
  localparam int CELLS_PER_WEIGHT = 3;    // ternary cells per 4-bit weight
  localparam int W_BITS           = 4;    // sign + 3 magnitude bits

  // Stored state of one dual 10T cell.
  typedef struct packed {
    logic ql;
    logic qr;
  } cell_t;

  localparam cell_t CELL_ZERO = '{ql: 1'b0, qr: 1'b0};
  localparam cell_t CELL_POS  = '{ql: 1'b1, qr: 1'b0};
  localparam cell_t CELL_NEG  = '{ql: 1'b0, qr: 1'b1};

  // Signed value of a cell; the illegal state (H,H) reads as 0.
  function automatic int cell_value(cell_t c);
    if (c.ql && !c.qr) return 1;
    if (!c.ql && c.qr) return -1;
    return 0;
  endfunction

  // Signed value of a 4-bit sign-magnitude weight.
  function automatic int weight_value(logic [W_BITS-1:0] w);
    return w[W_BITS-1] ? -int'(w[W_BITS-2:0]) : int'(w[W_BITS-2:0]);
  endfunction

endpackage
