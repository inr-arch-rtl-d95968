// copy_stream: the 1:N kernel that multicasts one array stream to N_OUT
// consumer streams.
//
// Every stream in the dataflow design has exactly one producer and one
// consumer, so when a kernel's result feeds several kernels a copy_stream is
// placed after it. Each input block is delivered once to every output; the
// input block is consumed only after all outputs have taken it.
//
// How it works: a block is offered to all outputs at once. An output that
// accepts it is marked "done" and is not offered that block again, so fast
// consumers do not wait for slow ones within a block, but no output can run
// more than one block ahead of another. This has the same blocking behaviour
// as writing the element to each output in turn (round robin): if any one
// output stream is full, the copy stops consuming its input. Delivering to
// all outputs in the same cycle, rather than one output per cycle, is this
// design's choice.
//
// Interface: valid/ready on all sides, BS elements per block.
// Timing: combinational (no register on the data path); an input block is
// consumed in the cycle its last pending output accepts it. The out_data
// buses are the input bus repeated, so a synthesis report lists them as
// wired straight to an input; that is the intended multicast.
// Reset: synchronous active-low, clears the done flags.
module copy_stream #(
  parameter int unsigned BS    = 4,
  parameter int unsigned DW    = 32,
  parameter int unsigned N_OUT = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [BS-1:0][DW-1:0] in_data,
  output logic [N_OUT-1:0]      out_valid,
  input  logic [N_OUT-1:0]      out_ready,
  output logic [N_OUT-1:0][BS-1:0][DW-1:0] out_data
);

  logic [N_OUT-1:0] done;      // output already took the current block
  logic [N_OUT-1:0] taken;     // output has it after this cycle

  always_comb begin
    for (int i = 0; i < N_OUT; i++) begin
      out_valid[i] = in_valid && !done[i];
      out_data[i]  = in_data;
      taken[i]     = done[i] || (out_valid[i] && out_ready[i]);
    end
    in_ready = &taken;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) done <= '0;
    else if (in_valid && in_ready) done <= '0;
    else if (in_valid) done <= taken;
  end

endmodule
