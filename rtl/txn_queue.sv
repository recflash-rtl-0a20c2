// txn_queue: synchronous FIFO holding pending embedding lookups (the
// transaction queue of the controller front end).
//
// Valid/ready on both sides: a word is pushed when in_valid && in_ready and
// popped when out_valid && out_ready. out_data shows the head word whenever
// out_valid is high (first-word fall-through). Depth and width are choices of
// this implementation; the paper only names the queue.
module txn_queue #(
  parameter int unsigned WIDTH = 21,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!(in_valid && !in_ready && level == '0))
      else $error("txn_queue: not ready while empty");
endmodule
