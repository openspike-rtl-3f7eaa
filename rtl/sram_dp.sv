// sram_dp: dual-port SRAM bank (one write port, one synchronous read port).
//
// Stands for the OpenRAM dual-port macros that hold every memory of the
// accelerator: weights, spikes and inhibition bits, membrane potentials, decay
// rates and input data. The bank is W bits wide and D words deep; the write port
// has a mask with one bit per LANE-bit lane so that the host can fill a wide row
// one 32-bit word at a time. Read data appears on rdata the cycle after re and
// holds until the next read. There is no reset: contents are loaded by the host
// or written by the core before they are read.
// The port structure follows the dual-port macros the paper names; widths and
// depths of each bank are set at the instance and are this design's choice of
// organisation (the sizes in kilobytes follow the paper).
module sram_dp #(
  parameter int unsigned W    = 32,
  parameter int unsigned D    = 512,
  parameter int unsigned LANE = 8,
  localparam int unsigned AW  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned NL  = W / LANE
) (
  input  logic          clk,
  // write port
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [NL-1:0] wmask,
  input  logic [W-1:0]  wdata,
  // read port
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [D];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < int'(NL); l++) begin
        if (wmask[l]) mem[waddr][l*LANE +: LANE] <= wdata[l*LANE +: LANE];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  initial begin
    assert (W % LANE == 0) else $error("sram_dp: W must be a multiple of LANE");
  end

endmodule
