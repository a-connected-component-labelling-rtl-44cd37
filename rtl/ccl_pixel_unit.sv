// ccl_pixel_unit: label decision for one foreground pixel (8-connectivity).
//
// Inputs are the labels of the left neighbour (l) and of the three upper
// neighbours (ul, u, ur); 0 means background. A five-bit vector
// {p, l!=0, ul!=0, u!=0, ur!=0} selects which neighbours are taken:
//   left set            -> left and (u if set, else ur)
//   left clear, u set   -> u only (ul and ur touch u, so they already share
//                          its label or a recorded merger)
//   left and u clear    -> ul and ur
// The pixel takes the smaller of the (at most two) selected labels; if both
// are set and differ, a merger larger -> smaller is reported. With no
// labelled neighbour the pixel takes new_i and flags used_new_o.
// Background pixels get label 0. Purely combinational.
// The neighbourhood (Fig. 1 style: G/L and P3..P0) and the lower-label rule
// follow the paper; the selection table is this design's.
module ccl_pixel_unit
  import ccl_pkg::*;
(
  input  logic   p_i,
  input  label_t l_i,
  input  label_t ul_i,
  input  label_t u_i,
  input  label_t ur_i,
  input  label_t new_i,
  output label_t label_o,
  output merge_t merge_o,
  output logic   used_new_o
);

  logic [4:0] vec;
  label_t     a, b;

  assign vec = {p_i, l_i != '0, ul_i != '0, u_i != '0, ur_i != '0};

  always_comb begin
    a = '0;
    b = '0;
    casez (vec)
      5'b0????: begin a = '0;   b = '0;   end
      5'b11?1?: begin a = l_i;  b = u_i;  end
      5'b11?0?: begin a = l_i;  b = ur_i; end
      5'b10?1?: begin a = u_i;  b = '0;   end
      default : begin a = ul_i; b = ur_i; end  // 5'b10?0?
    endcase

    merge_o    = '0;
    used_new_o = 1'b0;
    if (!p_i)                      label_o = '0;
    else if (a == '0 && b == '0) begin
      label_o    = new_i;
      used_new_o = 1'b1;
    end
    else if (a == '0)              label_o = b;
    else if (b == '0)              label_o = a;
    else begin
      label_o = lmin(a, b);
      if (a != b) begin
        merge_o.valid = 1'b1;
        merge_o.src   = lmax(a, b);
        merge_o.dst   = lmin(a, b);
      end
    end
  end

endmodule
