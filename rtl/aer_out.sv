// aer_out: spike-to-AER output interface.
//
// Sends every spike of LINES single-wire spike inputs off chip as an
// address-event on a parallel AER bus: the address is the index of the line
// that fired. In the PSI this carries, per ear, the front-end and the
// band-pass output spikes (see psi_top for the address map, which follows the
// paper's measurement set-up).
//
// How it works. Each line has a one-deep pending flag that is set by a spike
// and cleared when its event is taken. A round-robin arbiter picks the next
// pending line after the one served last, so no line starves. The chosen
// address is latched and sent with a four-phase handshake: assert req, wait
// for ack high, drop req, wait for ack low. ack comes from another board and
// is synchronised with two flops. A spike that arrives while its line is
// still pending cannot be queued; it is dropped and that line's bit of lost
// pulses for one cycle.
// The handshake polarity (active high), the arbiter and the one-deep buffers
// are this design's choices: the paper names the AER output only.
//
// Timing: with ack answering in A cycles per phase the bus carries one event
// every 2*(A+2)+1 system cycles at best. req rises the cycle after an address
// is chosen; addr is stable while req is high.
module aer_out #(
  parameter int unsigned LINES  = 8,
  parameter int unsigned ADDR_W = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LINES-1:0]  spk,       // one-cycle spike per line
  output logic              aer_req,
  input  logic              aer_ack,   // asynchronous
  output logic [ADDR_W-1:0] aer_addr,
  output logic [LINES-1:0]  lost       // per line: a spike found the line still pending
);

  typedef enum logic [1:0] {IDLE, REQ, WAIT_LOW} state_t;

  state_t             state;
  logic [LINES-1:0]   pending, take;
  logic [ADDR_W-1:0]  last, pick;
  logic               found;
  logic               ack_meta, ack_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_meta <= 1'b0;
      ack_s    <= 1'b0;
    end else begin
      ack_meta <= aer_ack;
      ack_s    <= ack_meta;
    end
  end

  // Round-robin: first pending line after the last one served.
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = 1; i <= LINES; i++) begin
      logic [ADDR_W-1:0] idx;
      idx = ADDR_W'((int'(last) + i) % LINES);
      if (!found && pending[idx]) begin
        found = 1'b1;
        pick  = ADDR_W'(idx);
      end
    end
  end

  always_comb begin
    take = '0;
    if (state == IDLE && found) take[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      lost    <= '0;
    end else begin
      pending <= (pending & ~take) | spk;
      lost    <= spk & pending & ~take;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      aer_req  <= 1'b0;
      aer_addr <= '0;
      last     <= ADDR_W'(LINES - 1);
    end else begin
      unique case (state)
        IDLE: if (found) begin
          aer_addr <= pick;
          last     <= pick;
          aer_req  <= 1'b1;
          state    <= REQ;
        end
        REQ: if (ack_s) begin
          aer_req <= 1'b0;
          state   <= WAIT_LOW;
        end
        WAIT_LOW: if (!ack_s) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  // Four-phase rules: the address holds while req is high, and req only
  // falls after ack has been seen.
  assert property (@(posedge clk) disable iff (!rst_n)
                   aer_req && $past(aer_req) |-> aer_addr == $past(aer_addr));
  assert property (@(posedge clk) disable iff (!rst_n)
                   $fell(aer_req) |-> $past(ack_s));

endmodule
