// weight_mem: storage for every weight and bias of the model.
//
// In the source the trained parameters are compiled into the firmware as
// constants.  Here they are held in a register array that is written one
// word per clock through a load port (wr_en, wr_addr, wr_data) before
// inference, so that the same netlist runs any set of trained weights; the
// whole array is presented in parallel on q[], as the fully parallel layers
// read every weight in every clock.  The layout is the Keras order given in
// tf_pkg.  Writes outside 0..DEPTH-1 are ignored.  Contents are not reset.
//
// Timing: a write is visible on q[] after the rising edge that takes it.
module weight_mem
  import tf_pkg::*;
#(
  parameter int DEPTH = N_PARAMS,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  output data_t         q [DEPTH]
);

  data_t mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en && (int'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;

  assign q = mem;

endmodule
