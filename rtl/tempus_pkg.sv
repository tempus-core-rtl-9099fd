// tempus_pkg: types shared by the blocks of the Tempus convolution core.
//
// The PE cell unit (PCU) takes one kind of command per handshake: either a
// weight-cube load into selected PE cells, or a feature-cube operation that
// all enabled cells compute on. Every feature operation carries a tag that
// the PCU passes through unchanged to its output registers, so that the
// convolution accumulator (CACC) knows where the partial sums belong.
// The command encoding, the tag layout and the position width are choices of
// this design; NVDLA's own interface between its sequencer and MAC array is
// not reproduced.
package tempus_pkg;

  // Width of the output-position counter carried in the tag (up to 65535
  // output pixels per layer).
  localparam int unsigned POS_W = 16;

  typedef enum logic {
    OP_WT   = 1'b0,   // load the weight cube into the cells named by sel
    OP_FEAT = 1'b1    // broadcast a feature cube; sel is the cell-enable mask
  } pcu_op_e;

  typedef struct packed {
    logic [POS_W-1:0] pos;        // output position (pixel) index in the layer
    logic             first;      // first channel group of this position
    logic             last;       // last channel group of this position
    logic             layer_last; // last operation of the whole layer
  } pcu_tag_t;

endpackage
