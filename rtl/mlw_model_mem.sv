// mlw_model_mem: on-chip model storage, one write port and one read port.
//
// Holds up to 32K 32-bit model values as DEPTH words of 64 values (2048 bits),
// so one access moves the 64 values one bank needs per cycle; all 8 banks read
// the same word, which keeps the model bit width at 2K. The engine has two:
// the architectural model x (read by the dot product, written once per
// mini-batch) and the working model x_w (read-modify-written every 8 samples).
// Timing: rdata is the word at raddr one cycle after the read; a read of the
// word being written in the same cycle returns the old contents (block RAM
// read-before-write). The memory is inferred from an array; its contents are
// not reset, the host loads the model before training.
module mlw_model_mem #(
  parameter int unsigned WIDTH = 2048,
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
