// pcg_fifo: small synchronous FIFO with a valid/ready interface on both sides,
// used inside the PCG blocks. Storage is a register array of DEPTH entries of
// type T with read and write pointers and an occupancy counter. A push is
// accepted when in_valid && in_ready (in_ready = not full); a pop happens
// when out_valid && out_ready (out_valid = not empty). The head entry is
// visible on out_data in the same cycle it becomes valid (first-word
// fall-through). Push and pop may happen in the same cycle.
module pcg_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                  mem [DEPTH];
  logic [PW-1:0]     rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  logic push, pop;
  assign in_ready  = (cnt_q != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt_q != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_q];
  assign count     = cnt_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      case ({push, pop})
        2'b10:   cnt_q <= cnt_q + 1'b1;
        2'b01:   cnt_q <= cnt_q - 1'b1;
        default: cnt_q <= cnt_q;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= in_data;
  end

endmodule
