// fhemem_chain: inter-bank data movement of one pseudo-channel, the partial
// chain network plus the conventional channel IO.
//
// Neighbouring banks inside a bank group (GROUP banks, numbered consecutively)
// are joined by 256-bit links: a block leaves the source bank's transfer buffer
// and enters the destination bank's transfer buffer in the same cycle, and all
// such links work at once. Every other transfer, and all traffic to and from
// the host, uses the shared channel IO, which carries one 256-bit block per
// CHIO_CYCLES cycles and one transfer at a time (lowest source number first).
//
// A route (route_valid/ready) names a source (bank 0..BANKS-1, or BANKS for the
// host write port), a destination (bank, or BANKS for the host read port) and a
// number of blocks; a source has at most one route open. The host write port is
// host_w*, the read port host_r* (the host always accepts). Counters report how
// many blocks took each path.
//
// From the paper: chain links between neighbouring banks of a bank group,
// 256-bit wide, other transfers through the channel IO. The group size, the
// channel IO rate and the arbitration are this design's choices.
module fhemem_chain
  import fhemem_pkg::*;
#(
  parameter int unsigned BANKS       = 8,
  parameter int unsigned GROUP       = 4,
  parameter int unsigned CHIO_CYCLES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               route_valid,
  input  logic [3:0]         route_src,
  input  logic [3:0]         route_dst,
  input  logic [5:0]         route_n,
  output logic               route_ready,
  // bank transfer buffers
  input  logic [BANKS-1:0]   out_valid,
  input  block_t             out_data [BANKS],
  output logic [BANKS-1:0]   out_ready,
  output logic [BANKS-1:0]   in_valid,
  output block_t             in_data  [BANKS],
  input  logic [BANKS-1:0]   in_ready,
  // host side of the channel IO
  input  logic               host_wvalid,
  input  block_t             host_wdata,
  output logic               host_wready,
  output logic               host_rvalid,
  output block_t             host_rdata,
  output logic               idle,
  output logic [31:0]        n_link_blocks,
  output logic [31:0]        n_io_blocks
);
  localparam int unsigned NS = BANKS + 1;   // sources: banks and the host

  logic [NS-1:0] active;
  logic [3:0]    dst  [NS];
  logic [5:0]    left [NS];

  function automatic logic is_nb(int unsigned a, int unsigned b);
    return (a < BANKS) && (b < BANKS) && (a / GROUP == b / GROUP) &&
           ((a + 1 == b) || (b + 1 == a));
  endfunction

  // channel IO state
  logic          io_busy;
  block_t        io_data;
  logic [3:0]    io_dst;
  logic [$clog2(CHIO_CYCLES+1)-1:0] io_cnt;

  // source s wants the channel IO
  logic [NS-1:0] io_req;
  logic [NS-1:0] src_valid;
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      src_valid[s] = (s < BANKS) ? out_valid[s] : host_wvalid;
      io_req[s]    = active[s] && src_valid[s] && !is_nb(s, int'(dst[s]));
    end
  end
  logic          io_grant;
  logic [3:0]    io_src;
  always_comb begin
    io_grant = 1'b0;
    io_src   = '0;
    if (!io_busy)
      for (int s = NS - 1; s >= 0; s--) if (io_req[s]) begin io_grant = 1'b1; io_src = 4'(s); end
  end

  logic io_deliver;   // channel IO hands its block to the destination this cycle
  logic [NS-1:0] pop;
  always_comb begin
    in_valid    = '0;
    out_ready   = '0;
    host_wready = 1'b0;
    host_rvalid = 1'b0;
    host_rdata  = io_data;
    io_deliver  = 1'b0;
    pop         = '0;
    for (int b = 0; b < BANKS; b++) in_data[b] = io_data;
    // direct neighbour links
    for (int s = 0; s < BANKS; s++) begin
      if (active[s] && out_valid[s] && is_nb(s, int'(dst[s]))) begin
        in_valid[dst[s]] = 1'b1;
        in_data[dst[s]]  = out_data[s];
        out_ready[s]     = in_ready[dst[s]];
        pop[s]           = in_ready[dst[s]];
      end
    end
    // channel IO: deliver
    if (io_busy && io_cnt == 0) begin
      if (int'(io_dst) == BANKS) begin
        host_rvalid = 1'b1;
        io_deliver  = 1'b1;
      end else if (!in_valid[io_dst]) begin
        in_valid[io_dst] = 1'b1;
        in_data[io_dst]  = io_data;
        io_deliver       = in_ready[io_dst];
      end
    end
    // channel IO: take a block
    if (io_grant) begin
      pop[io_src] = 1'b1;
      if (int'(io_src) == BANKS) host_wready = 1'b1;
      else out_ready[io_src] = 1'b1;
    end
  end

  assign route_ready = !active[route_src];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0; io_busy <= 1'b0; io_data <= '0; io_dst <= '0; io_cnt <= '0;
      n_link_blocks <= '0; n_io_blocks <= '0;
      for (int s = 0; s < NS; s++) begin dst[s] <= '0; left[s] <= '0; end
    end else begin
      for (int s = 0; s < NS; s++) if (pop[s]) begin
        left[s] <= left[s] - 1'b1;
        if (left[s] == 1) active[s] <= 1'b0;
        if (io_grant && int'(io_src) == s) n_io_blocks <= n_io_blocks + 1;
        else n_link_blocks <= n_link_blocks + 1;
      end
      if (io_grant) begin
        io_busy <= 1'b1;
        io_data <= (int'(io_src) == BANKS) ? host_wdata : out_data[io_src];
        io_dst  <= dst[io_src];
        io_cnt  <= ($clog2(CHIO_CYCLES+1))'(CHIO_CYCLES - 1);
      end else if (io_busy && io_cnt != 0) io_cnt <= io_cnt - 1'b1;
      else if (io_deliver) io_busy <= 1'b0;
      if (route_valid && route_ready) begin
        active[route_src] <= 1'b1;
        dst[route_src]    <= route_dst;
        left[route_src]   <= route_n;
      end
    end
  end

  assign idle = (active == '0) && !io_busy;

endmodule
