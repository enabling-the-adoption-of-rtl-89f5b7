// impica_queue: synchronous FIFO used for IMPICA's request queue, access
// queue and response queue. The paper gives each queue 16 entries; the entry
// type is a parameter so the same module carries request, access and
// response entries. Valid/ready handshake on both sides: an entry is written
// when in_valid && in_ready and removed when out_valid && out_ready. Data at
// the head is visible combinationally (first-word fall-through), so a push
// into an empty queue can be popped on the next cycle. Reset empties it.
module impica_queue #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16             // paper: 16 entries per queue
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
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T            mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH)
    else $error("impica_queue: count overflow");
endmodule
