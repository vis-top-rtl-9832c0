// mem_cache: memory cache unit of Vis-TOP.
//
// On-chip byte memory that holds feature data in the flattened C x H x W
// layout (W fastest), sitting on the data bus between the data selection
// engine and the compute modules. It has two synchronous read ports (so an
// element-wise operation can fetch both operands in one cycle) and one write
// port. A read returns the word stored before a write to the same address
// in the same cycle (read-first). The paper names this unit but gives no
// size or port count: DEPTH = 512 KiB and the 2R1W organisation are this
// design's own (one Swin-T stage-1 feature map, 56x56x96 = 301,056 bytes,
// fits). No reset: the contents are defined only after being written.
// Timing: ra_data / rb_data are valid the cycle after ra_en / rb_en.
module mem_cache
  import vt_pkg::*;
#(
  parameter int unsigned DEPTH = 524288
) (
  input  logic                     clk,
  input  logic                     ra_en,
  input  logic [$clog2(DEPTH)-1:0] ra_addr,
  output logic [DATA_W-1:0]        ra_data,
  input  logic                     rb_en,
  input  logic [$clog2(DEPTH)-1:0] rb_addr,
  output logic [DATA_W-1:0]        rb_data,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [DATA_W-1:0]        wdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ra_en) ra_data <= mem[ra_addr];
    if (rb_en) rb_data <= mem[rb_addr];
    if (we)    mem[waddr] <= wdata;
  end
endmodule
