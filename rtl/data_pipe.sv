// data_pipe: delay line between two median finding stages (DataPipe25w).
//
// A simple dual-port memory, DEPTH words of DATA_W + 1 bits (raw data plus
// first-data marker), written at waddr and read at raddr every clock with a
// registered read. With the shared pipe_addr_gen the delay from (din, d1st)
// to (dout, dv) is N + 5 cycles. The default depth, 256 words, is the
// block-RAM version of the paper (four 9-bit pipes fit one 40-bit-wide M10K
// block); DEPTH = 32 gives the distributed-memory version for small N.
// The data are passed on unchanged, so the next stage reads unspoiled data.
//
// dv is the stored marker masked with rd_ok (registered alongside the read),
// so that memory never written since reset reads as "no marker"; this mask
// is this design's own choice.
module data_pipe #(
  parameter int unsigned DATA_W = tmf_pkg::DATA_W_DEF,
  parameter int unsigned DEPTH  = tmf_pkg::PIPE_DEPTH_DEF,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [AW-1:0]     waddr,
  input  logic [AW-1:0]     raddr,
  input  logic              rd_ok,
  input  logic [DATA_W-1:0] din,
  input  logic              d1st,
  output logic [DATA_W-1:0] dout,
  output logic              dv
);

  logic [DATA_W:0] mem [DEPTH];
  logic [DATA_W:0] rdata;
  logic            ok_q;

  always_ff @(posedge clk) begin
    mem[waddr] <= {d1st, din};
    rdata      <= mem[raddr];
    ok_q       <= rd_ok;
  end

  assign dout = rdata[DATA_W-1:0];
  assign dv   = rdata[DATA_W] & ok_q;

endmodule
