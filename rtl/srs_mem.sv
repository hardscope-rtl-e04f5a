// srs_mem: protected memory that holds the Storage Region Stack (SRS)
// frames that are not active.
//
// Frame f occupies words f*N_ENTRIES .. f*N_ENTRIES+N_ENTRIES-1, one
// storage-region entry (64 bits) per word; the frame's entry count is kept
// by the controller. The memory has no port towards the processor's
// load/store path, so only the SRS controller (and thus only HardScope
// instructions) can change it.
// Single port, synchronous: with en=1 a write stores wdata at addr at the
// clock edge; a read returns mem[addr] on rdata one cycle later. One entry
// moves per cycle, which is where the "up to N extra cycles" of sbent and
// sbxit comes from.
// The 16 frames x 16 entries size is the published configuration (one FPGA
// block RAM); the single-port, one-cycle-latency organisation is this
// design's choice.
module srs_mem
  import hs_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 16,
  parameter int unsigned N_FRAMES  = 16,
  localparam int unsigned DEPTH = N_ENTRIES * N_FRAMES,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       en,
  input  logic       we,
  input  logic [AW-1:0] addr,
  input  srs_entry_t wdata,
  output srs_entry_t rdata
);

  srs_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
