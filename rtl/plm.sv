// plm: private local memory (scratchpad) of an accelerator.
//
// A simple dual-port RAM of DEPTH words: one synchronous write port and one
// synchronous read port with one cycle of read latency. Because a PLM must not
// carry data from one invocation (possibly of another process) to the next,
// a pulse on `clr` starts a sweep that writes zero into every word, one word
// per cycle; `clr_busy` is high for the DEPTH cycles of the sweep, and writes
// from the user port are ignored meanwhile. The zeroing on every invocation
// follows the accelerator description; one bank, one read and one write port
// and the sweep timing are this design's choices.
module plm #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  output logic             clr_busy,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    clr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_addr <= '0;
    end else if (clr) begin
      clr_busy <= 1'b1;
      clr_addr <= '0;
    end else if (clr_busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == AW'(DEPTH - 1)) clr_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clr_busy)  mem[clr_addr] <= '0;
    else if (we)   mem[waddr]    <= wdata;
    rdata <= mem[raddr];
  end

endmodule
