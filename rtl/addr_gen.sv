// addr_gen: address generation of the near-storage search unit. For each
// candidate taken from a rerank queue it computes the physical byte address
// of the candidate's full-precision vector in the HBF stack and packages it,
// with the number of data beats to fetch and a tag, into a read request.
//
// Address map (this design's choice; the paper only says the module "computes
// the physical address of its corresponding raw vector"): raw vectors are
// stored back to back from cfg_base with a fixed stride of cfg_stride bytes,
// so  addr = cfg_base + id * cfg_stride.  The read length is cfg_beats beats
// of 256 bits (32 elements, one beat per MAC pass).
//
// Timing: one register stage. in_ready is high when the output register is
// empty or being emptied, so a request is accepted every cycle while the
// flash side keeps req_ready high, and a request appears on req_* one cycle
// after it was accepted. req_* stays stable while req_valid && !req_ready.
module addr_gen
  import haven_pkg::*;
#(
  parameter int unsigned STRIDE_W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   cfg_base,
  input  logic [STRIDE_W-1:0] cfg_stride,
  input  logic [BEATS_W-1:0]  cfg_beats,
  // candidate from the queue scheduler
  input  logic                in_valid,
  output logic                in_ready,
  input  nsu_tag_t            in_tag,
  // read request to the HBF stack
  output logic                req_valid,
  input  logic                req_ready,
  output hbf_req_t            req
);
  logic [ID_W+STRIDE_W-1:0] offset;
  assign offset   = in_tag.id * cfg_stride;
  assign in_ready = !req_valid || req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      req       <= '0;
    end else if (in_ready) begin
      req_valid <= in_valid;
      if (in_valid) begin
        req.addr  <= cfg_base + ADDR_W'(offset);
        req.beats <= cfg_beats;
        req.tag   <= in_tag;
      end
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid && $stable(req));

endmodule
