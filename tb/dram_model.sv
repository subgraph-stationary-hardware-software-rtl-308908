// dram_model: behavioural off-chip memory for simulation only.
//
// Accepts one beat request per cycle while ready (ready can be withheld on
// a fixed pattern to model a bandwidth below one beat per cycle) and returns
// each beat LAT cycles later, in order, with no back-pressure. The data of a
// beat is computed from its address with sushi_tb_pkg::dram_byte, so the
// memory needs no storage and the testbench can recompute every weight.
module dram_model #(
  parameter int unsigned DRAMW = 1152,
  parameter int unsigned LAT   = 20,
  parameter int unsigned GAP   = 0     // idle cycles forced after each accepted request
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [31:0]      req_addr,
  output logic             resp_valid,
  output logic [DRAMW-1:0] resp_data
);
  typedef struct { logic [31:0] addr; longint due; } pend_t;
  pend_t  q[$];
  longint now = 0;
  int     gap_cnt = 0;

  initial resp_valid = 1'b0;

  assign req_ready = (gap_cnt == 0);

  always @(posedge clk) begin
    now <= now + 1;
    resp_valid <= 1'b0;
    if (q.size() > 0 && q[0].due <= now) begin
      pend_t p;
      p = q.pop_front();
      resp_valid <= 1'b1;
      for (int b = 0; b < DRAMW/8; b++) resp_data[b*8 +: 8] <= sushi_tb_pkg::dram_byte(p.addr, b);
    end
    if (gap_cnt > 0) gap_cnt <= gap_cnt - 1;
    else if (req_valid) begin
      q.push_back('{addr: req_addr, due: now + longint'(LAT)});
      gap_cnt <= int'(GAP);
    end
  end
endmodule
