// axis_counter - time base for latency measurements (the "Counter module").
//
// A WIDTH-bit counter in the system clock domain (100 MHz on the prototype,
// so one count is 10 ns and 32 bits wrap after about 43 s). It counts up by
// one every cycle while en is high and is zeroed synchronously by clr. The
// value is offered as an always-ready stream: m_axis_tvalid is high while the
// counter runs and m_axis_tdata is the current count; there is no
// back-pressure, a consumer simply samples the beat it needs.
//
// The paper names the block (axis_counter_0) and its use, time-stamping in
// the same clock domain as the test manager; width, enable and clear are this
// design's choices. Latency: tdata shows the count of the current cycle.
//
// m_axis_tvalid is en itself: the count is valid whenever it is running.
module axis_counter #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clr,
  output logic             m_axis_tvalid,
  output logic [WIDTH-1:0] m_axis_tdata
);

  logic [WIDTH-1:0] count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clr)   count <= '0;
    else if (en)    count <= count + 1'b1;
  end

  assign m_axis_tvalid = en;
  assign m_axis_tdata  = count;

endmodule
