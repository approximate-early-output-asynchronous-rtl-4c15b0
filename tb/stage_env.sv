// Behavioural sender and receiver for one eo_adder_stage (the two ends of
// the handshake channel), with a scoreboard.
//
// Sender: after reset it sends NVEC operand pairs, random except for a few
// directed ones. It presents a token when the stage's ackout invites it
// (RTZ: data while ackout = 0, spacer while ackout = 1; RTO: data while
// ackout = 1, spacer while ackout = 0), after a random gap. Each token is
// applied to all operand bits in the same time step, as a vector-driven test
// bench does: the stage's output-side acknowledge may otherwise close the
// input register before a late operand bit has entered it (see the stage's
// description). If ackout has not answered one step after a token is applied,
// the stage is being held back by the output side and a stall is counted.
// Receiver: waits until every result bit holds data, checks it against an
// independent model of the approximate sum, waits a random time (which is what
// back-pressures the stage), raises its ACKOUT, waits for a complete spacer and
// releases ACKOUT again. Every output word is also checked to be legal at all
// times.
// Counters: completed transactions, stalls, slow receiver responses, carries
// of 1 into the accurate part, carry outputs of 1, results that differ from the
// exact sum.
module stage_env
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH       = 32,
  parameter int unsigned APPROX_BITS = 8,
  parameter protocol_e   PROTOCOL    = RTO,
  parameter int unsigned NVEC        = 1000
) (
  output logic            rst_n,
  output dr_t [WIDTH-1:0] a,
  output dr_t [WIDTH-1:0] b,
  input  logic            ackout,
  input  dr_t [WIDTH-1:0] sum,
  input  dr_t             cout,
  output logic            rx_ackout,
  output logic            done,
  output int              checks,
  output int              failures,
  output int              n_done,
  output int              n_stall,
  output int              n_slow_rx,
  output int              n_approx_carry,
  output int              n_cout_one,
  output int              n_inexact
);

  localparam logic ACK_DATA = ack_after_data(PROTOCOL);

  logic [WIDTH-1:0] q_a [$], q_b [$];
  logic out_all_data, out_all_spacer, out_illegal;

  always_comb begin
    out_all_data   = is_data(cout);
    out_all_spacer = is_spacer(PROTOCOL, cout);
    out_illegal    = is_illegal(PROTOCOL, cout);
    for (int i = 0; i < WIDTH; i++) begin
      if (!is_data(sum[i]))              out_all_data   = 1'b0;
      if (!is_spacer(PROTOCOL, sum[i]))  out_all_spacer = 1'b0;
      if (is_illegal(PROTOCOL, sum[i]))  out_illegal    = 1'b1;
    end
  end

  function automatic logic [WIDTH:0] model(logic [WIDTH-1:0] x, logic [WIDTH-1:0] y);
    logic [WIDTH:0] hi;
    logic [WIDTH-1:0] lo_mask;
    if (APPROX_BITS == 0) return {1'b0, x} + {1'b0, y};
    hi = ({1'b0, x} >> APPROX_BITS) + ({1'b0, y} >> APPROX_BITS)
         + (WIDTH+1)'(x[APPROX_BITS-1] & y[APPROX_BITS-1]);
    lo_mask = (WIDTH'(1) << APPROX_BITS) - 1;
    return (hi << APPROX_BITS) | {1'b0, (x | y) & lo_mask};
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [K=%0d %s] %s at %0t", APPROX_BITS, PROTOCOL.name(), what, $time);
    end
  endtask

  initial begin
    checks = 0; failures = 0; n_done = 0; n_stall = 0; n_slow_rx = 0;
    n_approx_carry = 0; n_cout_one = 0; n_inexact = 0; done = 1'b0;
  end

  // Output words must never be illegal once out of reset.
  always @(posedge out_illegal) if (rst_n) check("legal output word", 1'b0);

  // Sender
  initial begin
    logic [WIDTH-1:0] av, bv;
    rst_n = 1'b0;
    for (int i = 0; i < WIDTH; i++) begin
      a[i] = spacer(PROTOCOL);
      b[i] = spacer(PROTOCOL);
    end
    #5 rst_n = 1'b1;
    #5;
    for (int n = 0; n < NVEC; n++) begin
      av = $urandom; bv = $urandom;
      if (n == 0) begin av = '1; bv = '1; end
      if (n == 1) begin av = '0; bv = '0; end
      wait (ackout == ~ACK_DATA);
      q_a.push_back(av); q_b.push_back(bv);
      // the whole data word is presented at once, after a random gap
      #($urandom_range(3, 0));
      for (int i = 0; i < WIDTH; i++) begin
        a[i] = encode(PROTOCOL, av[i]);
        b[i] = encode(PROTOCOL, bv[i]);
      end
      #1;
      if (ackout != ACK_DATA) n_stall++;
      wait (ackout == ACK_DATA);
      #($urandom_range(3, 0));
      for (int i = 0; i < WIDTH; i++) begin
        a[i] = spacer(PROTOCOL);
        b[i] = spacer(PROTOCOL);
      end
      #1;
      if (ackout != ~ACK_DATA) n_stall++;
    end
  end

  // Receiver
  initial begin
    logic [WIDTH:0] got, exp, exact;
    logic [WIDTH-1:0] av, bv;
    int dly;
    rx_ackout = ~ACK_DATA;
    wait (rst_n);
    for (int n = 0; n < NVEC; n++) begin
      wait (out_all_data);
      #0;
      check("result without operands", q_a.size() > 0);
      if (q_a.size() > 0) begin
        av = q_a.pop_front(); bv = q_b.pop_front();
        got[WIDTH] = decode(PROTOCOL, cout);
        for (int i = 0; i < WIDTH; i++) got[i] = decode(PROTOCOL, sum[i]);
        exp = model(av, bv);
        exact = {1'b0, av} + {1'b0, bv};
        check("result value", got == exp);
        if (got != exp && failures < 20)
          $display("  a=%h b=%h got %h exp %h", av, bv, got, exp);
        if (APPROX_BITS > 0 && av[APPROX_BITS-1] && bv[APPROX_BITS-1]) n_approx_carry++;
        if (got[WIDTH]) n_cout_one++;
        if (got != exact) n_inexact++;
      end
      dly = $urandom_range(20, 0);
      if (dly > 10) n_slow_rx++;
      #(dly);
      rx_ackout = ACK_DATA;
      wait (out_all_spacer);
      #($urandom_range(5, 0));
      rx_ackout = ~ACK_DATA;
      n_done++;
    end
    #5;
    check("all transactions done", n_done == NVEC);
    check("no operands left", q_a.size() == 0);
    done = 1'b1;
  end

endmodule
