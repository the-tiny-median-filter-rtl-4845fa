// pipe_addr_gen: shared address counters of the data pipes.
//
// Every data pipe is a simple dual-port memory written at waddr and read at
// raddr each clock. Both addresses count up by one per clock; raddr trails
// waddr by N + FINDER_LAT - 1, so that with the memory's registered read the
// pipe delays data and marker by N + FINDER_LAT cycles (N + 5). That is the
// delay after which a finder stage has the result for a data set ready and
// the next stage must see the same set. All pipes have the same depth and
// share one instance, as the paper proposes. N is a run-time input (set by
// switches or a status register) and must satisfy N + FINDER_LAT <= DEPTH.
//
// rd_ok is this design's own addition: it is low until the word at raddr has
// been written since reset, so that uninitialised memory cannot produce a
// false first-data marker. It is valid in the same cycle as raddr.
module pipe_addr_gen #(
  parameter int unsigned DEPTH      = tmf_pkg::PIPE_DEPTH_DEF,
  parameter int unsigned FINDER_LAT = tmf_pkg::FINDER_LAT,
  localparam int unsigned AW        = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [AW-1:0] n_size,   // data set size N
  output logic [AW-1:0] waddr,
  output logic [AW-1:0] raddr,
  output logic          rd_ok
);

  logic [AW-1:0] offset;
  logic [AW-1:0] waddr_nx;
  logic [AW:0]   fill;            // writes since reset, saturating at DEPTH

  assign offset   = n_size + AW'(FINDER_LAT - 1);
  assign waddr_nx = rst ? '0 : waddr + 1'b1;

  always_ff @(posedge clk) begin
    waddr <= waddr_nx;
    raddr <= waddr_nx - offset;
    if (rst)                       fill <= '0;
    else if (fill != (AW+1)'(DEPTH)) fill <= fill + 1'b1;
  end

  assign rd_ok = fill >= {1'b0, offset};

endmodule
