// sync_fifo: single-clock first-in first-out buffer used for the LLC
// request queues and the bypass write path. Valid/ready on both sides; the
// head entry is shown on rd_data while rd_valid is high and leaves when
// rd_ready is also high. Capacity DEPTH entries (a power of two). Storage is
// a plain register array; the pointers reset to empty.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_valid,
  output logic wr_ready,
  input  T     wr_data,
  output logic rd_valid,
  input  logic rd_ready,
  output T     rd_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [PW:0] wp, rp;

  assign count    = wp - rp;
  assign wr_ready = count != (PW+1)'(DEPTH);
  assign rd_valid = count != '0;
  assign rd_data  = mem[rp[PW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_valid && wr_ready) wp <= wp + 1'b1;
      if (rd_valid && rd_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready) mem[wp[PW-1:0]] <= wr_data;
  end

  // The occupancy can never pass the capacity.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH))
    else $error("sync_fifo: overflow");
endmodule
