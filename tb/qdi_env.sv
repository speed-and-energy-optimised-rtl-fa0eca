// qdi_env: behavioural sender and receiver for bclarc_top, with a scoreboard.
//
// The sender follows the 4-phase handshake of the chosen protocol. It drives the
// operands of a transaction one dual-rail signal at a time in random order, with
// random gaps of 1..3 time units. Then it waits until tx_ack says they were taken,
// returns all signals to the spacer in the same instant, and waits for the
// acknowledge again. The spacer must arrive as one vector: the adder resets early, so
// the output side can acknowledge the spacer, and re-arm the input register, before
// a straggling input rail has reset. That rail would then be stuck. The stage relies
// on this timing, as the paper assumes isochronic forks on all primary inputs. Under RTZ, tx_ack = 1 acknowledges data and 0 the spacer; under RTO the levels
// are swapped.
// The receiver waits for a complete result, checks it against the expected sum (an
// ordinary integer addition done here), and after a random delay of 1..RX_MAX_DELAY
// acknowledges through rx_ack (one time in eight it waits
// RX_SLOW/2..RX_SLOW instead). It then waits for the spacer and withdraws rx_ack,
// again after a delay. The delays make the stage hold results and stall the sender.
// Operands are random. Every 10th transaction is a full-length carry propagation,
// every 10th an all-ones overflow and every 10th a zero sum.
// It also asserts the handshake rules of the stage's two channels (see below).
// Result outputs: done, checks, failures and counts of the events the stage must show.
module qdi_env
  import qdi_pkg::*;
#(
  parameter int        WIDTH        = 32,
  parameter protocol_e PROTOCOL     = RTZ,
  parameter int        NVEC         = 100,
  parameter int        RX_MAX_DELAY = 6,
  parameter int        RX_SLOW      = 400
) (
  output logic            rst_n,
  output dr_t [WIDTH-1:0] x,
  output dr_t [WIDTH-1:0] y,
  output dr_t             cin,
  input  logic            tx_ack,
  input  dr_t [WIDTH-1:0] sum,
  input  dr_t             cout,
  output logic            rx_ack,
  output logic            done,
  output int              checks,
  output int              failures,
  output int              n_rx,        // results received
  output int              n_ovf,       // results with carry-out 1
  output int              n_prop,      // carries propagated through every bit
  output int              n_stall,     // sender waited on a stage that was still busy
  output int              n_nonmono    // output rail changes that broke monotonicity
);

  localparam int  NIN      = 2 * WIDTH + 1;
  localparam int  NOUT     = WIDTH + 1;
  localparam logic ACK_DATA   = (PROTOCOL == RTZ);
  localparam logic ACK_SPACER = (PROTOCOL != RTZ);

  logic [WIDTH:0] expq [$];
  dr_t  [NIN-1:0] din;
  dr_t  [NOUT-1:0] dout, dout_prev;
  logic out_full, out_empty;

  assign x    = din[WIDTH-1:0];
  assign y    = din[2*WIDTH-1:WIDTH];
  assign cin  = din[2*WIDTH];
  assign dout = {cout, sum};

  always_comb begin
    out_full  = 1'b1;
    out_empty = 1'b1;
    for (int i = 0; i < NOUT; i++) begin
      if (!is_data(dout[i]))             out_full  = 1'b0;
      if (!is_spacer(PROTOCOL, dout[i])) out_empty = 1'b0;
    end
  end

  task automatic shuffle(ref int ord[NIN]);
    for (int i = NIN - 1; i > 0; i--) begin
      int j = int'($urandom_range(i, 0));
      int s = ord[i]; ord[i] = ord[j]; ord[j] = s;
    end
  endtask

  // sender
  initial begin
    int ord[NIN];
    logic [WIDTH-1:0] a, b;
    logic c;
    logic [NIN-1:0] v;
    time t0;
    checks = 0; failures = 0; n_rx = 0; n_ovf = 0; n_prop = 0; n_stall = 0;
    done = 1'b0;
    rst_n = 1'b0;
    for (int i = 0; i < NIN; i++) begin din[i] = spacer(PROTOCOL); ord[i] = i; end
    #5 rst_n = 1'b1;
    #2;
    for (int t = 0; t < NVEC; t++) begin
      a = WIDTH'({$urandom, $urandom});
      b = WIDTH'({$urandom, $urandom});
      c = 1'($urandom);
      case (t % 10)
        3: begin b = ~a; c = 1'b1; end
        6: begin a = '1; b = '1; end
        9: begin a = '0; b = '0; c = 1'b0; end
        default: ;
      endcase
      if ((a ^ b) == '1 && c) n_prop++;
      expq.push_back({1'b0, a} + {1'b0, b} + (WIDTH+1)'(c));
      v = {c, b, a};
      wait (tx_ack == ACK_SPACER);
      shuffle(ord);
      for (int i = 0; i < NIN; i++) begin
        #($urandom_range(3, 1));
        din[ord[i]] = encode(PROTOCOL, v[ord[i]]);
      end
      t0 = $time;
      wait (tx_ack == ACK_DATA);
      if ($time > t0) n_stall++;   // the output side had not yet released the stage
      #($urandom_range(3, 1));
      for (int i = 0; i < NIN; i++) din[i] = spacer(PROTOCOL);
    end
    wait (n_rx == NVEC);
    wait (tx_ack == ACK_SPACER);
    #10 done = 1'b1;
  end

  // receiver
  initial begin
    logic [WIDTH:0] got, e;
    rx_ack = ACK_SPACER;
    #6;
    forever begin
      wait (out_full);
      for (int i = 0; i < NOUT; i++) got[i] = decode(PROTOCOL, dout[i]);
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected result %h", got);
      end else begin
        e = expq.pop_front();
        if (got !== e) begin
          failures++;
          if (failures < 20) $display("FAIL result %h expected %h", got, e);
        end
        if (e[WIDTH]) n_ovf++;
      end
      n_rx++;
      // now and then a slow receiver, slower than the sender's next operand
      if ($urandom_range(7, 0) == 0) #($urandom_range(RX_SLOW, RX_SLOW / 2));
      else                           #($urandom_range(RX_MAX_DELAY, 1));
      rx_ack = ACK_DATA;
      wait (out_empty);
      #($urandom_range(RX_MAX_DELAY, 1));
      rx_ack = ACK_SPACER;
    end
  end

  // monotonicity of the stage outputs: while the receiver waits for data, a rail may
  // only leave the spacer; while it waits for the spacer, a data rail may only return.
  initial n_nonmono = 0;
  always @(dout) begin
    if (rst_n) for (int i = 0; i < NOUT; i++) begin
      if (is_data(dout_prev[i]) && dout[i] != dout_prev[i] && !is_spacer(PROTOCOL, dout[i]))
        n_nonmono++;
      if (is_illegal(PROTOCOL, dout[i])) n_nonmono++;
    end
    dout_prev = dout;
  end
  initial dout_prev = '0;

  // Handshake rules, checked from the end of reset on. The stage may acknowledge data
  // only when every input carries data, and the spacer only when every input is back
  // to the spacer. An output rail may leave the spacer only while rx_ack asks for
  // data, and return to it only while rx_ack acknowledges data.
  logic armed = 1'b0;
  dr_t [NOUT-1:0] dout_hs;
  initial dout_hs = '0;
  always @(posedge rst_n) dout_hs = dout;
  always @(posedge rst_n) #1 armed = 1'b1;

  always @(tx_ack) if (armed) begin
    if (tx_ack == ACK_DATA)
      assert (all_inputs(1'b1)) else begin
        failures++; $display("FAIL %0t: data acknowledged before all inputs arrived", $time);
      end
    else
      assert (all_inputs(1'b0)) else begin
        failures++; $display("FAIL %0t: spacer acknowledged before all inputs reset", $time);
      end
  end

  always @(dout) if (armed) begin
    for (int i = 0; i < NOUT; i++) begin
      if (is_spacer(PROTOCOL, dout_hs[i]) && is_data(dout[i]))
        assert (rx_ack == ACK_SPACER) else begin
          failures++; $display("FAIL %0t: output bit %0d set while acknowledged", $time, i);
        end
      if (is_data(dout_hs[i]) && is_spacer(PROTOCOL, dout[i]))
        assert (rx_ack == ACK_DATA) else begin
          failures++; $display("FAIL %0t: output bit %0d reset before acknowledge", $time, i);
        end
    end
    dout_hs = dout;
  end

  function automatic bit all_inputs(bit want_data);
    for (int i = 0; i < NIN; i++)
      if (want_data ? !is_data(din[i]) : !is_spacer(PROTOCOL, din[i])) return 1'b0;
    return 1'b1;
  endfunction

endmodule
