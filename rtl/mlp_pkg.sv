// mlp_pkg: types shared by the MLP accelerator.
//
// The accelerator is loaded through one host write port in the clk_inbuff
// domain. A write carries a target (weight, bias, input pixel or per-layer
// scale alpha), a layer, a row, a column and a 16-bit value. Field widths are
// fixed here so the struct can appear on the top-level port list; modules
// use only the low bits they need. The encoding of the host port is this
// design's own choice: the source design only says that the parameters are
// trained on a CPU/GPU and loaded into RAM.
package mlp_pkg;

  // What a host write targets.
  typedef enum logic [1:0] {
    HOST_WEIGHT = 2'd0,  // wdata[WB-1:0] = SPx weight code of (layer,row,col)
    HOST_BIAS   = 2'd1,  // wdata = signed bias of (layer,row), Q7.8
    HOST_PIXEL  = 2'd2,  // wdata[7:0] = input element col, unsigned Q0.8
    HOST_ALPHA  = 2'd3   // wdata[7:0] = scale alpha of layer, unsigned Q4.4
  } host_sel_e;

  typedef struct packed {
    logic        we;
    host_sel_e   sel;
    logic        layer;  // 0: hidden layer W(2), 1: output layer W(3)
    logic [15:0] row;
    logic [15:0] col;
    logic [15:0] wdata;
  } host_wr_t;

endpackage
