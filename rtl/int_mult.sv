// Three-stage pipelined wide integer multiplier, p = x * y.
//
// The multiplier splits both operands. y is cut into CHUNK-bit pieces
// y_0 .. y_{NCH-1} (y_0 least significant). x is cut at bit XLO into a lower
// part x[XLO-1:0] and an upper part x[AW-1:XLO]. A "partial multiplication"
// forms one product of an x part with every y chunk, each small enough for a
// DSP slice, and a "low-latency addition tree" sums the products pairwise:
// neighbours first, shifted by one chunk, then the pair sums shifted by two
// chunks, then by four, and so on, so that no adder has a long carry chain
// feeding another in series more than log2(NCH) deep.
//
//   stage 1: partial products of x_lo with all y chunks are registered,
//            x_hi and y are registered alongside
//   stage 2: the tree sums the x_lo products (registered); the partial
//            products of x_hi are formed and registered in parallel
//   stage 3: the tree sums the x_hi products, shifts them by XLO and adds the
//            x_lo sum; the product is registered
//
// Timing: operands presented in cycle t give the product on `p` after the
// third rising edge (latency 3); a new pair is accepted every cycle. There is
// no valid signal and no enable: the caller delays its own control bits.
//
// From the paper: 27-bit chunks, x split in two at bit 127, the three stages
// and the tree shape (for 10 chunks: shifts of 27, 54, 108 and 216). The
// paper's pipeline figure labels the upper part x[254:126], but its formula
// weights the upper half by 2^127 and the lower part is x[126:0], so the
// upper part here is x[AW-1:127]. Widths AW/BW are parameters so that the
// same unit serves the 254 x 254, 255 x 255 and 255 x 254 products of the
// Barrett reduction.
module int_mult #(
  parameter int unsigned AW    = 254,  // width of x
  parameter int unsigned BW    = 254,  // width of y
  parameter int unsigned CHUNK = 27,   // DSP operand width for y chunks
  parameter int unsigned XLO   = 127   // bits of x in the lower part
) (
  input  logic               clk,
  input  logic [AW-1:0]      x,
  input  logic [BW-1:0]      y,
  output logic [AW+BW-1:0]   p
);

  localparam int unsigned NCH    = (BW + CHUNK - 1) / CHUNK;  // y chunks
  localparam int unsigned XHI    = AW - XLO;                  // bits of upper x
  localparam int unsigned PW     = AW + BW;                   // product width
  localparam int unsigned LEVELS = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned YPAD   = NCH * CHUNK;

  logic [YPAD-1:0] y_pad;
  assign y_pad = YPAD'(y);

  // ---------------- stage 1: x_lo partial products -----------------------
  logic [XLO+CHUNK-1:0] pp_lo_q [NCH];
  logic [XHI-1:0]       xhi_q;
  logic [YPAD-1:0]      y_q;

  always_ff @(posedge clk) begin
    for (int i = 0; i < NCH; i++) begin
      pp_lo_q[i] <= (XLO+CHUNK)'(x[XLO-1:0]) * (XLO+CHUNK)'(y_pad[i*CHUNK +: CHUNK]);
    end
    xhi_q <= x[AW-1:XLO];
    y_q   <= y_pad;
  end

  // Pairwise addition tree over NCH partial products, lvl[0] being the
  // products themselves. At level l the node i (a multiple of 2^(l+1))
  // absorbs node i + 2^l shifted by CHUNK * 2^l bits.
  function automatic logic [PW-1:0] add_tree(input logic [PW-1:0] leaf [NCH]);
    logic [PW-1:0] lvl [LEVELS+1][NCH];
    lvl[0] = leaf;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < NCH; i++) begin
        lvl[l+1][i] = lvl[l][i];
        if ((i % (2 << l)) == 0 && (i + (1 << l)) < NCH)
          lvl[l+1][i] = lvl[l][i] + (lvl[l][i + (1 << l)] << (CHUNK * (1 << l)));
      end
    end
    return lvl[LEVELS][0];
  endfunction

  // ---------------- stage 2: x_lo sum, x_hi partial products --------------
  logic [PW-1:0]        leaf_lo [NCH];
  logic [PW-1:0]        sum_lo_q;
  logic [XHI+CHUNK-1:0] pp_hi_q [NCH];

  always_comb begin
    for (int i = 0; i < NCH; i++) leaf_lo[i] = PW'(pp_lo_q[i]);
  end

  always_ff @(posedge clk) begin
    sum_lo_q <= add_tree(leaf_lo);
    for (int i = 0; i < NCH; i++) begin
      pp_hi_q[i] <= (XHI+CHUNK)'(xhi_q) * (XHI+CHUNK)'(y_q[i*CHUNK +: CHUNK]);
    end
  end

  // ---------------- stage 3: x_hi sum, final combination ------------------
  logic [PW-1:0] leaf_hi [NCH];

  always_comb begin
    for (int i = 0; i < NCH; i++) leaf_hi[i] = PW'(pp_hi_q[i]);
  end

  always_ff @(posedge clk) begin
    p <= sum_lo_q + (add_tree(leaf_hi) << XLO);
  end

endmodule
