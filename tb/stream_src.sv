// stream_src: testbench helper that offers the N elements of mem as a
// valid/ready stream of BS-element blocks, in order. valid is raised at
// random (VALID_PCT percent of the cycles) and, once raised, is held until
// the block is taken. sent counts the blocks taken.
module stream_src
  import inr_pkg::*;
#(
  parameter int unsigned N         = 8,
  parameter int unsigned BS        = 2,
  parameter int unsigned VALID_PCT = 60
) (
  input  logic           clk,
  input  logic           rst_n,
  input  data_t          mem [N],
  output logic           valid,
  input  logic           ready,
  output data_t [BS-1:0] data,
  output int             sent
);
  localparam int unsigned NB = N / BS;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0;
      sent  <= 0;
    end else begin
      automatic int nx = sent + ((valid && ready) ? 1 : 0);
      sent <= nx;
      if (!valid || ready)
        valid <= (nx < NB) && ($urandom_range(0, 99) < VALID_PCT);
    end
  end

  always_comb
    for (int e = 0; e < BS; e++)
      data[e] = (sent < NB) ? mem[sent*BS + e] : '0;
endmodule
