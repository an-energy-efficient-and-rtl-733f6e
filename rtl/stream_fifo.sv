// stream_fifo -- synchronous first-in first-out buffer with valid/ready
// handshakes on both sides.  Used as the input buffer (commands and sensor
// data coming from the front end and DDR) and the output buffer (pose update
// and prior information going back to DDR).  Only the two buffers are named
// for the accelerator; their depth, width and handshake are this design's
// choice.  A word is accepted when in_valid && in_ready and delivered when
// out_valid && out_ready; the output is registered-free (first word visible
// one cycle after it is written).
module stream_fifo #(
  parameter int WIDTH = 64,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (level != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) begin
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      unique case ({push, pop})
        2'b10:   level <= level + 1'b1;
        2'b01:   level <= level - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // a word is never pushed into a full buffer nor popped from an empty one
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && !in_ready && push));
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> level != '0);
endmodule
