// stream_fifo: synchronous first-word-fall-through FIFO with valid/ready ports.
//
// The paper decouples its pipeline stages with FIFOs of depth 256 placed in block
// RAM ("STREAM depth=256", "BIND_STORAGE type=fifo impl=bram"). This FIFO keeps
// DEPTH words of WIDTH bits in an array with a read and a write pointer; the head
// word is always visible on out_data while out_valid is high (first word falls
// through), so a consumer can take one word per clock. A word written into an
// empty FIFO is visible on the next clock. `count` reports the occupancy.
//
// Interface: in_valid/in_ready/in_data (push when both high), out_valid/out_ready/
// out_data (pop when both high); push and pop may happen in the same clock.
// The read is combinational from the array (this design's choice, which maps to
// distributed RAM; a block-RAM FIFO would add an output register).
module stream_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [PW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= incr(wp);
      if (pop)  rp <= incr(rp);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
