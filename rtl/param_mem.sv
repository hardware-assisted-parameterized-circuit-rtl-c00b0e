// param_mem: parameter memory of one physical qubit.
//
// A true dual-port RAM of DEPTH words of DATA_W bits (2048 x 32 by default,
// i.e. 8 KB, as in the published design, where it occupies two 36 Kb block
// RAMs). Port A belongs to the memory controller, through which the ARM
// writes the peeled phases; port B belongs to the stitch logic, which reads
// them during circuit execution. The other two directions (reads on port A,
// writes on port B) exist for debugging, as in the original.
//
// Timing: both ports are synchronous to clk. A read returns the word one
// cycle after en (read-first: a read and a write of the same port and
// address in one cycle return the old word). Writing one address from both
// ports in the same cycle is not allowed; the scheduler keeps loading and
// execution apart, and an assertion flags a collision. The single shared
// clock is this design's choice: the 100 MHz bus is crossed to 500 MHz
// before the memory controller.
module param_mem #(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  // port A: memory controller
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [DATA_W-1:0] a_wdata,
  output logic [DATA_W-1:0] a_rdata,
  // port B: stitch logic
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [DATA_W-1:0] b_wdata,
  output logic [DATA_W-1:0] b_rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

  // The two ports must never write the same word in the same cycle.
  a_no_write_collision: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr))
    else $error("param_mem: both ports write address %0d", a_addr);

endmodule
