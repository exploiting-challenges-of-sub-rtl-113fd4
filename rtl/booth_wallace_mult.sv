// booth_wallace_mult: WIDTH x WIDTH bit unsigned multiplier, Booth-Wallace.
//
// Radix-4 Booth encoding looks at overlapping 3-bit groups of the multiplier
// b (zero-extended by two bits at the top and one at the bottom) and turns
// each group into a partial product of 0, +a, +2a, -a or -2a, shifted by two
// bits per group: WIDTH/2 + 1 partial products instead of WIDTH. A Wallace
// tree of 3:2 carry-save adders reduces them, layer by layer, three rows to
// two, until two rows remain; a carry-propagate adder adds those. All rows
// are 2*WIDTH bits of two's complement, so sign handling is plain modular
// arithmetic and the final sum is the exact product.
//
// Interface and timing: operands a, b with in_valid; the product p appears in
// the output register one clock later with out_valid. rst_n is an
// asynchronous active-low reset of out_valid.
//
// Following the source: a 32-bit multiplier with Booth-Wallace topology. This
// design's choices: radix 4, unsigned operands, full 64-bit product and one
// output register stage.
module booth_wallace_mult #(
  parameter int unsigned WIDTH = 32,
  localparam int unsigned PW  = 2 * WIDTH,
  localparam int unsigned NPP = WIDTH / 2 + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [PW-1:0]    p,
  output logic             out_valid
);
  timeunit 1ns;
  timeprecision 1ps;

  // rows left after l layers of 3:2 reduction
  function automatic int unsigned rows_at(int unsigned l);
    int unsigned r;
    r = NPP;
    for (int unsigned i = 0; i < l; i++) r = 2 * (r / 3) + (r % 3);
    return r;
  endfunction

  function automatic int unsigned num_layers();
    int unsigned l;
    l = 0;
    while (rows_at(l) > 2) l++;
    return l;
  endfunction

  localparam int unsigned LAYERS = num_layers();

  // ------------------------------------------------------ Booth partial products
  logic [WIDTH+2:0] bx;      // {00, b, 0}
  logic [PW-1:0]    pp [NPP];

  assign bx = {2'b00, b, 1'b0};

  always_comb begin
    for (int unsigned i = 0; i < NPP; i++) begin
      logic [2:0]    grp;
      logic [PW-1:0] mag;
      grp = bx[2*i +: 3];
      unique case (grp)
        3'b001, 3'b010: mag = PW'(a);
        3'b011:         mag = PW'(a) << 1;
        3'b100:         mag = -(PW'(a) << 1);
        3'b101, 3'b110: mag = -PW'(a);
        default:        mag = '0;   // 000, 111
      endcase
      pp[i] = mag << (2 * i);
    end
  end

  // ------------------------------------------------------------- Wallace tree
  // Layer l reads the rows of layer l-1 (the partial products for l = 0) and
  // writes its own rows; each layer is a scope of its own.
  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    localparam int unsigned RIN  = rows_at(l);
    localparam int unsigned ROUT = rows_at(l + 1);
    localparam int unsigned NCSA = RIN / 3;
    logic [PW-1:0] rin  [RIN];
    logic [PW-1:0] rout [ROUT];
    for (genvar k = 0; k < RIN; k++) begin : g_in
      if (l == 0) begin : g_pp
        assign rin[k] = pp[k];
      end else begin : g_prev
        assign rin[k] = g_layer[l-1].rout[k];
      end
    end
    for (genvar g = 0; g < NCSA; g++) begin : g_csa
      assign rout[2*g]   = rin[3*g] ^ rin[3*g+1] ^ rin[3*g+2];               // sum
      assign rout[2*g+1] = ((rin[3*g] & rin[3*g+1]) | (rin[3*g] & rin[3*g+2])
                           | (rin[3*g+1] & rin[3*g+2])) << 1;                 // carry
    end
    for (genvar k = 0; k < RIN % 3; k++) begin : g_pass
      assign rout[2*NCSA+k] = rin[3*NCSA+k];
    end
  end

  // ------------------------------------------------- carry-propagate adder, reg
  logic [PW-1:0] sum;
  assign sum = g_layer[LAYERS-1].rout[0] + g_layer[LAYERS-1].rout[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) p <= sum;
    end
  end

endmodule
