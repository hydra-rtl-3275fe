// mem_model: behavioural model of the lower-level memory (DRAM) for the
// testbenches; not synthesizable and not part of the design. It accepts one
// request per cycle, answers reads and bypass-path writes after LAT cycles
// in request order, and applies writes immediately. Lines never written
// read as a hash of their address. `peek` returns the stored line.
module mem_model
  import hydra_pkg::*;
#(
  parameter int unsigned LAT = 40
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output mem_resp_t resp,
  output int        n_reads,
  output int        n_writes,
  output int        n_byp_writes
);
  line_t store [addr_t];
  typedef struct { mem_resp_t r; longint due; } pend_t;
  pend_t  q [$];
  longint cyc;

  function automatic line_t init_line(input addr_t a);
    line_t l;
    for (int i = 0; i < LINE_W/32; i++) l[i*32 +: 32] = 32'(a >> BLK_OFF) * 32'h9E37_79B9 + 32'(i);
    return l;
  endfunction

  function automatic line_t peek(input addr_t a);
    addr_t b;
    b = {a[ADDR_W-1:BLK_OFF], BLK_OFF'(0)};
    return store.exists(b) ? store[b] : init_line(b);
  endfunction

  assign req_ready  = rst_n;
  assign resp_valid = q.size() > 0 && q[0].due <= cyc;
  assign resp       = (q.size() > 0) ? q[0].r : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; n_reads <= 0; n_writes <= 0; n_byp_writes <= 0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      if (resp_valid && resp_ready) void'(q.pop_front());
      if (req_valid) begin
        addr_t     b;
        mem_resp_t r;
        b = {req.addr[ADDR_W-1:BLK_OFF], BLK_OFF'(0)};
        r = '0;
        r.write = req.write; r.byp = req.byp; r.src = req.src; r.id = req.id; r.addr = req.addr;
        if (req.write) begin
          store[b] = req.data;
          n_writes <= n_writes + 1;
          if (req.byp) begin
            n_byp_writes <= n_byp_writes + 1;
            q.push_back('{r: r, due: cyc + LAT});
          end
        end else begin
          r.data = peek(b);
          n_reads <= n_reads + 1;
          q.push_back('{r: r, due: cyc + LAT});
        end
      end
    end
  end
endmodule
