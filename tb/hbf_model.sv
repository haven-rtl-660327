// hbf_model: behavioural model of one HBF stack's read path, for simulation
// only. It accepts read requests (address, beat count, tag), waits LAT cycles
// per request and then returns the requested number of 256-bit beats in
// request order, each with the request's tag. Byte A of the flash holds
// tb_haven_pkg::flash_byte(A). STALL_PCT makes req_ready and rsp_valid drop
// at random to exercise back-pressure. The real stack (3D NAND subarrays,
// page buffers, TSVs) is not modelled; only its read interface is.
module hbf_model
  import haven_pkg::*;
  import tb_haven_pkg::*;
#(
  parameter int unsigned LAT       = 20,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  output logic            req_ready,
  input  hbf_req_t        req,
  output logic            rsp_valid,
  input  logic            rsp_ready,
  output logic [BEAT_W-1:0] rsp_data,
  output nsu_tag_t        rsp_tag
);
  typedef struct { hbf_req_t r; longint due; } pend_t;
  pend_t  pend[$];
  longint cyc;
  int     beat;
  bit     stall_rsp, stall_req;

  assign req_ready = rst_n && (pend.size() < 64) && !stall_req;

  always_comb begin
    rsp_valid = 1'b0;
    rsp_data  = '0;
    rsp_tag   = '0;
    if (pend.size() > 0 && pend[0].due <= cyc && !stall_rsp) begin
      rsp_valid = 1'b1;
      rsp_tag   = pend[0].r.tag;
      for (int l = 0; l < BEAT_W / 8; l++)
        rsp_data[l*8 +: 8] = flash_byte(pend[0].r.addr + ADDR_W'(beat * (BEAT_W / 8) + l));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; beat <= 0; stall_rsp <= 0; stall_req <= 0;
      pend.delete();
    end else begin
      cyc <= cyc + 1;
      stall_rsp <= ($urandom_range(99) < STALL_PCT);
      stall_req <= ($urandom_range(99) < STALL_PCT);
      if (rsp_valid && rsp_ready) begin
        if (beat + 1 == int'(pend[0].r.beats)) begin
          beat <= 0;
          void'(pend.pop_front());
        end else beat <= beat + 1;
      end
      if (req_valid && req_ready) pend.push_back('{r: req, due: cyc + LAT});
    end
  end
endmodule
