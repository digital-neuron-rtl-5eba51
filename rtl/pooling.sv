// pooling: reduces a 2x2 window of the output feature map to one value
// before it goes back into the input feature map.
//
// With pool2 high the output is the largest of the four values (2x2 max
// pooling). With pool2 low, win[0] passes unchanged. The copy is used for
// fully-connected layers, whose outputs are not pooled. The paper only names
// a pooling block, so the type (max) and size (2x2) are this design's
// choices. Combinational.
module pooling
  import dn_pkg::*;
(
  input  logic [3:0][X_W-1:0] win,    // {y+1,x+1}, {y+1,x}, {y,x+1}, {y,x}
  input  logic                pool2,
  output logic [X_W-1:0]      dout
);

  always_comb begin
    dout = win[0];
    if (pool2)
      for (int i = 1; i < 4; i++)
        if (win[i] > dout) dout = win[i];
  end

endmodule
