// sa_pkg: sizes and shared types of the weight-stationary systolic-array
// accelerator.
//
// The default geometry is a 32 x 32 array of processing elements with 16-bit
// integer inputs and weights and 37-bit column partial sums: 32 products of
// 32 bits each need 32 + log2(32) = 37 bits to be summed without loss. These
// three numbers come from the evaluated design. The buffer depths are this
// design's own choice: the input and output buffers hold 4096 vectors (enough
// for the 56 x 56 = 3136 output pixels of the largest ResNet-50 layer
// evaluated), the weight buffer holds 32 weight tiles of 32 x 32.
package sa_pkg;

  parameter int unsigned SA_ROWS = 32;   // R: PE rows (input lanes)
  parameter int unsigned SA_COLS = 32;   // C: PE columns (output lanes)
  parameter int unsigned SA_BH   = 16;   // horizontal bus: input / weight width
  parameter int unsigned SA_BV   = 37;   // vertical bus: partial-sum width

  parameter int unsigned SA_A_DEPTH = 4096;  // input / output buffer words per bank
  parameter int unsigned SA_W_DEPTH = 1024;  // weight buffer words per bank


  // Phases of one operation, see sa_controller.
  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,
    ST_LOAD_W = 2'd1,
    ST_STREAM = 2'd2,
    ST_DRAIN  = 2'd3
  } sa_state_e;

endpackage
