// Address decoder and counter buffer of the shared ramp ADC.
//
// All pixels whose comparator tripped present a pending sample request. Each
// clock cycle the decoder serves one request: it answers that pixel with a
// one-hot `clear` in the same cycle, and on the next clock edge it outputs the
// address together with the code from the counter buffer. Only one sample can be
// resolved per cycle, so when two or more requests are outstanding (a collision:
// several electrodes at the same voltage within one ramp step) it drops
// ramp_enable, which freezes the ramp until at most one request is left.
//
// Counter buffer. A request reaches the decoder DELAY cycles after the ramp code
// that tripped its comparator (synchronizer and pixel flops), so the code of a
// request is the delayed counter of the cycle it arrives in. Requests arriving in
// the same cycle form a batch sharing one latched code. Because comparator levels
// already in flight keep arriving for a few cycles after the ramp stops, up to
// BATCHES batches can be outstanding; they are kept in a small queue of
// {request mask, code} entries and served oldest batch first, lowest address
// first within a batch. With BATCHES = DELAY+1 the queue cannot overflow: after
// DELAY cycles of pause no new level reaches the comparators.
//
// Follows the paper: lowest address first within a collision, Clear ch per
// channel, Ramp enable deasserted during a collision, counter buffer latched from
// the delayed counter (all channels of one collision get the same code).
// This design's choices: combinational clear and ramp_enable (they change in the
// cycle the requests appear, as in the paper's timing figure), the batch queue
// that keeps late arrivals exact, one-cycle registered output.
//
// Timing: a request visible at cycle t with nothing else outstanding is cleared
// at t and reported at t+1; k simultaneous requests pause the ramp k-1 cycles.
module address_decoder
  import nr_pkg::*;
#(
  parameter int unsigned N       = NCH,
  parameter int unsigned BATCHES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      sample,         // pending requests
  input  logic [ADC_W-1:0]  count_delayed,  // code of requests arriving now
  output logic [N-1:0]      clear,          // one-hot answer to the served pixel
  output logic              ramp_enable,
  output adc_sample_t       out             // registered: valid, address, code
);
  localparam int unsigned CNT_W = $clog2(BATCHES + 1);

  logic [BATCHES-1:0][N-1:0]     qmask;    // outstanding requests per batch
  logic [BATCHES-1:0][ADC_W-1:0] qcode;    // latched code per batch
  logic [CNT_W-1:0]              qcnt;

  logic [N-1:0]                  known;
  logic [N-1:0]                  newreq;
  logic [BATCHES:0][N-1:0]       m;        // queue with this cycle's batch appended
  logic [BATCHES:0][ADC_W-1:0]   c;
  logic                          any;
  logic [ADDR_W-1:0]             idx;
  logic [N-1:0]                  head_left;
  logic [N-1:0]                  outstanding;

  always_comb begin
    known = '0;
    for (int b = 0; b < BATCHES; b++) if (b < int'(qcnt)) known |= qmask[b];
    newreq = sample & ~known;

    for (int b = 0; b <= BATCHES; b++) begin
      if (b < int'(qcnt)) begin
        m[b] = qmask[b];
        c[b] = qcode[b];
      end else if (b == int'(qcnt)) begin
        m[b] = newreq;
        c[b] = count_delayed;
      end else begin
        m[b] = '0;
        c[b] = '0;
      end
    end

    // serve the lowest address of the oldest batch
    any   = (m[0] != '0);
    idx   = '0;
    clear = '0;
    for (int i = N - 1; i >= 0; i--) if (m[0][i]) idx = ADDR_W'(i);
    if (any) clear[idx] = 1'b1;
    head_left = m[0] & ~clear;

    outstanding = known | newreq;
  end

  // At most one request outstanding: the ramp may advance.
  assign ramp_enable = ((outstanding & (outstanding - 1'b1)) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qmask <= '0;
      qcode <= '0;
      qcnt  <= '0;
      out   <= '0;
    end else begin
      out.valid <= any;
      if (any) begin
        out.addr <= idx;
        out.amp  <= c[0];
      end
      // queue update: head keeps its remaining requests or is removed
      if (head_left != '0) begin
        for (int b = 0; b < BATCHES; b++) begin
          qmask[b] <= (b == 0) ? head_left : m[b];
          qcode[b] <= c[b];
        end
        qcnt <= qcnt + CNT_W'(newreq != '0);
      end else begin
        for (int b = 0; b < BATCHES; b++) begin
          qmask[b] <= m[b+1];
          qcode[b] <= c[b+1];
        end
        qcnt <= qcnt + CNT_W'(newreq != '0) - CNT_W'(any);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(clear))
    else $error("address_decoder: clear is not one-hot");
  assert property (@(posedge clk) disable iff (!rst_n) (clear & ~sample) == '0)
    else $error("address_decoder: clear without request");
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(newreq != '0 && int'(qcnt) == BATCHES))
    else $error("address_decoder: batch queue overflow");
endmodule
