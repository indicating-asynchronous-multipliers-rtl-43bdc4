// cd_check: exercises one completion detector in one protocol. The bus
// starts as spacer; bits turn to data one at a time in a random order
// and ACKOUT must stay at its spacer level until the last bit, then take
// its data level. The spacer returns the same way. done rises at the end.
module cd_check
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO = RTZ,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned ROUNDS = 200
) (
  output int   checks,
  output int   failures,
  output logic done
);
  dr_t [WIDTH-1:0] bus;
  logic            ackout;
  // ACKOUT level for a complete data word and for a complete spacer.
  localparam logic ACK_DATA   = (PROTO == RTZ);
  localparam logic ACK_SPACER = (PROTO == RTO);

  completion_detector #(.PROTO(PROTO), .WIDTH(WIDTH)) dut (.bus(bus), .ackout(ackout));

  task automatic shuffle(ref int unsigned order[WIDTH]);
    for (int i = 0; i < WIDTH; i++) order[i] = i;
    for (int i = WIDTH-1; i > 0; i--) begin
      int unsigned j = $urandom_range(i);
      int unsigned t = order[i];
      order[i] = order[j];
      order[j] = t;
    end
  endtask

  initial begin
    int unsigned order[WIDTH];
    logic [WIDTH-1:0] val;
    checks = 0; failures = 0; done = 1'b0;
    for (int i = 0; i < WIDTH; i++) bus[i] = dr_spacer(PROTO);
    #1;
    for (int r = 0; r < ROUNDS; r++) begin
      val = WIDTH'($urandom);
      shuffle(order);
      for (int i = 0; i < WIDTH; i++) begin
        bus[order[i]] = dr_encode(PROTO, val[order[i]]);
        #1;
        checks++;
        if (ackout !== ((i == WIDTH-1) ? ACK_DATA : ACK_SPACER)) begin
          failures++;
          $display("%s data step %0d: ackout=%b", PROTO.name(), i, ackout);
        end
      end
      shuffle(order);
      for (int i = 0; i < WIDTH; i++) begin
        bus[order[i]] = dr_spacer(PROTO);
        #1;
        checks++;
        if (ackout !== ((i == WIDTH-1) ? ACK_SPACER : ACK_DATA)) begin
          failures++;
          $display("%s spacer step %0d: ackout=%b", PROTO.name(), i, ackout);
        end
      end
    end
    done = 1'b1;
  end
endmodule
