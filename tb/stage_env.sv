// stage_env: behavioural transmitter and receiver around one
// indicating_multiplier, with the checks of an end-to-end run.
//
// Transmitter: after reset it waits for ackout to show that the spacer was
// taken, then presents an operand pair bit by bit in a random order with
// random gaps, waits for ackout to show that the data was taken, and
// returns the bus to spacer bit by bit in the same way. ackout must not
// show "data taken" before the last operand bit is on the bus, nor "spacer
// taken" before the last bit has left it.
// Receiver: waits for a complete product, compares it with the expected
// product of the oldest pair sent, acknowledges after a random delay,
// waits for the spacer and releases the acknowledgement after another
// random delay. A product that is complete before its operands were all
// sent, a product bit with an illegal code, or a held product bit that
// changes to anything but spacer, is an error.
// Counted mechanisms: data tokens and spacer tokens through the stage,
// stalls (the operand bank had taken a word while the receiver was still
// acknowledging the previous product, so the product bank had to hold the
// new product back), and early product bits (a product bit that was already data
// before the last operand bit of its word arrived: weak indication).
// With EXHAUSTIVE set the operand pairs run through all 2^(2N) values.
module stage_env
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO      = RTO,
  parameter int unsigned N          = 4,
  parameter int unsigned ROUNDS     = 256,
  parameter bit          EXHAUSTIVE = 1'b1,
  parameter int unsigned RX_DELAY   = 20
) (
  output logic          rst,
  output dr_t [N-1:0]   a,
  output dr_t [N-1:0]   b,
  input  logic          ackout,
  input  dr_t [2*N-1:0] p,
  output logic          rx_ackout,
  output int            checks,
  output int            failures,
  output int            data_tokens,
  output int            spacer_tokens,
  output int            stalls,
  output int            early_bits,
  output logic          done
);
  localparam int unsigned W = 2 * N;
  localparam logic ACK_DATA   = (PROTO == RTZ);
  localparam logic ACK_SPACER = (PROTO == RTO);

  dr_t [W-1:0]  opnd;
  logic [W-1:0] expected [$];
  logic         sending;     // the transmitter has not yet put every bit of the word on the bus
  logic         tx_done;
  logic         tx_phase_data;  // 1 while sending data, 0 while sending spacer
  logic         bank_empty;     // product bank was spacer when the word started

  assign a = opnd[N-1:0];
  assign b = opnd[W-1:N];

  function automatic logic all_data(dr_t [W-1:0] v);
    for (int i = 0; i < W; i++) if (!dr_is_data(PROTO, v[i])) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic all_spacer(dr_t [W-1:0] v);
    for (int i = 0; i < W; i++) if (!dr_is_spacer(PROTO, v[i])) return 1'b0;
    return 1'b1;
  endfunction

  task automatic shuffle(ref int unsigned order[W]);
    for (int i = 0; i < W; i++) order[i] = i;
    for (int i = W-1; i > 0; i--) begin
      int unsigned j = $urandom_range(i);
      int unsigned t = order[i];
      order[i] = order[j];
      order[j] = t;
    end
  endtask

  task automatic error(string what);
    failures++;
    $display("%s N=%0d: %s", PROTO.name(), N, what);
  endtask

  // Indication at the stage boundary: nothing downstream may complete
  // while the transmitter is still putting the word on the bus.
  always @(ackout or p) begin
    if (!rst && sending) begin
      if (ackout == ACK_DATA && tx_phase_data) error("ackout shows data before the last operand bit");
      if (ackout == ACK_SPACER && !tx_phase_data) error("ackout shows spacer before the last operand bit left");
    end
  end

  // Transmitter.
  initial begin
    int unsigned order[W];
    logic [W-1:0] vops;
    checks = 0; failures = 0; data_tokens = 0; spacer_tokens = 0;
    stalls = 0; early_bits = 0;
    sending = 1'b0; tx_phase_data = 1'b1; tx_done = 1'b0;
    for (int i = 0; i < W; i++) opnd[i] = dr_spacer(PROTO);
    rst = 1'b1;
    #5 rst = 1'b0;
    #1;
    for (int r = 0; r < ROUNDS; r++) begin
      vops = EXHAUSTIVE ? W'(r) : W'($urandom);
      wait (ackout == ACK_SPACER);
      #($urandom_range(3));
      expected.push_back(W'(vops[N-1:0]) * W'(vops[W-1:N]));
      shuffle(order);
      bank_empty = all_spacer(p);
      tx_phase_data = 1'b1;
      sending = 1'b1;
      for (int i = 0; i < W; i++) begin
        opnd[order[i]] = dr_encode(PROTO, vops[order[i]]);
        if (i == W-1) sending = 1'b0;
        #($urandom_range(1, 3));
        for (int k = 0; k < W; k++) begin
          checks++;
          if (dr_is_illegal(PROTO, p[k])) error("illegal product code");
          if (i < W-1 && bank_empty && dr_is_data(PROTO, p[k])) early_bits++;
        end
      end
      wait (ackout == ACK_DATA);
      if (rx_ackout == ACK_DATA) stalls++;
      #($urandom_range(3));
      shuffle(order);
      tx_phase_data = 1'b0;
      sending = 1'b1;
      for (int i = 0; i < W; i++) begin
        opnd[order[i]] = dr_spacer(PROTO);
        if (i == W-1) sending = 1'b0;
        #($urandom_range(1, 3));
      end
    end
    wait (ackout == ACK_SPACER);
    tx_done = 1'b1;
  end

  // Receiver.
  initial begin
    logic [W-1:0] want, got;
    rx_ackout = ACK_SPACER;
    done = 1'b0;
    #6;
    for (int r = 0; r < ROUNDS; r++) begin
      while (!all_data(p)) @(p);
      checks++;
      if (sending && tx_phase_data) error("product complete before operands");
      for (int k = 0; k < W; k++) got[k] = dr_value(PROTO, p[k]);
      if (expected.size() == 0) begin
        error("product without operands");
      end else begin
        want = expected.pop_front();
        if (got !== want) error($sformatf("product %0d, expected %0d", got, want));
      end
      data_tokens++;
      #($urandom_range(RX_DELAY));
      rx_ackout = ACK_DATA;
      while (!all_spacer(p)) begin
        @(p);
        // A held product may only return to spacer, bit by bit.
        for (int k = 0; k < W; k++) begin
          if (!dr_is_spacer(PROTO, p[k]) && p[k] !== dr_encode(PROTO, got[k]))
            error("held product changed before the spacer");
        end
      end
      spacer_tokens++;
      #($urandom_range(RX_DELAY));
      rx_ackout = ACK_SPACER;
    end
    wait (tx_done);
    done = 1'b1;
  end
endmodule
