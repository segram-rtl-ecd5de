// region_bounds: arithmetic of the candidate seed region calculator.
//
// Given the start a and end b of a minimizer in the read, the start c and end
// d of its seed in the linearized reference, the read length m and the error
// rate E, the candidate region (subgraph) is
//     x = c - a * (1 + E)            (left extension)
//     y = d + (m - b - 1) * (1 + E)  (right extension)
// as in the paper. E is given as an 8-bit fraction err_q8 = E * 256; each
// extension is rounded down. x is clamped at 0 and y at ref_len - 1, which
// the paper does not discuss. Result registered: x, y and valid appear one
// cycle after in_valid.
module region_bounds #(
  parameter int unsigned EFRAC = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [15:0]      a,
  input  logic [15:0]      b,
  input  logic [31:0]      c,
  input  logic [31:0]      d,
  input  logic [15:0]      m,
  input  logic [EFRAC-1:0] err,
  input  logic [31:0]      ref_len,
  output logic             out_valid,
  output logic [31:0]      x,
  output logic [31:0]      y
);
  logic [EFRAC:0]       one_plus_e;
  logic [16+EFRAC:0]    left_ext, right_ext;
  logic [15:0]          tail;
  logic [32:0]          y_raw;
  logic [31:0]          lext, rext;

  assign one_plus_e = {1'b1, err};
  assign tail       = (m > b) ? (m - b - 16'd1) : 16'd0;
  assign left_ext   = a    * one_plus_e;
  assign right_ext  = tail * one_plus_e;
  assign lext       = 32'(left_ext  >> EFRAC);
  assign rext       = 32'(right_ext >> EFRAC);
  assign y_raw      = {1'b0, d} + {1'b0, rext};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x         <= '0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x <= (c > lext) ? (c - lext) : 32'd0;
        y <= (y_raw >= {1'b0, ref_len}) ? (ref_len - 32'd1) : y_raw[31:0];
      end
    end
  end
endmodule
