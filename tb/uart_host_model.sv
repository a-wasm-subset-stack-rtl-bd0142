// uart_host_model: behavioural serial terminal for simulation only. It
// decodes the frames the design sends (8N1, LSB first, sampling in the
// middle of each bit) into rx_q, and sends bytes to the design with
// send(). CPB is the bit time in clocks of clk. frame_errors counts frames
// whose stop bit was low.
module uart_host_model #(
  parameter int CPB = 234
) (
  input  logic clk,
  input  logic from_dut,
  output logic to_dut
);

  byte unsigned rx_q[$];
  int frame_errors = 0;

  initial to_dut = 1'b1;

  // receive
  initial begin
    forever begin
      logic [7:0] d;
      @(negedge from_dut);
      repeat (CPB / 2) @(posedge clk);
      if (from_dut == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          d[i] = from_dut;
        end
        repeat (CPB) @(posedge clk);
        if (from_dut != 1'b1) frame_errors++;
        rx_q.push_back(d);
      end
    end
  end

  // transmit one frame
  task automatic send(input logic [7:0] d);
    logic [9:0] f;
    f = {1'b1, d, 1'b0};
    for (int i = 0; i < 10; i++) begin
      to_dut = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

endmodule
