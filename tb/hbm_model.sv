// hbm_model -- behavioural model of the off-chip HBM read path (not RTL).
//
// Accepts at most one beat read per cycle, throttled by a credit counter to
// RATE_NUM/RATE_DEN beats per cycle (915/1000 of a 1 KiB beat per cycle is
// 1.64 TB/s at a 1.75 GHz core clock).  Each accepted read returns, in
// request order, LAT cycles later with the beat tb_pkg::beat_pattern(addr)
// and the request's tag.  Counts accepted reads in n_req.
module hbm_model
  import ppsched_pkg::*;
#(
  parameter int LAT      = 16,
  parameter int RATE_NUM = 915,
  parameter int RATE_DEN = 1000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [HBM_AW-1:0] req_addr,
  input  hbm_tag_t          req_tag,
  output logic              rsp_valid,
  output hbm_tag_t          rsp_tag,
  output logic [DATA_W-1:0] rsp_data,
  output int                n_req
);
  typedef struct { logic [HBM_AW-1:0] addr; hbm_tag_t tag; longint due; } ent_t;
  ent_t   q[$];
  longint cyc;
  int     credit;

  assign req_ready = rst_n && (credit >= RATE_DEN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; credit <= 0; n_req <= 0;
      rsp_valid <= 1'b0; rsp_tag <= '0; rsp_data <= '0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        q.push_back('{addr: req_addr, tag: req_tag, due: cyc + LAT});
        n_req  <= n_req + 1;
        credit <= credit - RATE_DEN + RATE_NUM;
      end else if (credit < 2 * RATE_DEN) begin
        credit <= credit + RATE_NUM;
      end
      rsp_valid <= 1'b0;
      if (q.size() != 0 && q[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_tag   <= q[0].tag;
        rsp_data  <= tb_pkg::beat_pattern(q[0].addr);
        void'(q.pop_front());
      end
    end
  end
endmodule
