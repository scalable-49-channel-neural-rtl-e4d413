// Packet builder of the central controller: compressed/raw selection, buffering
// and framing of the outbound data.
//
// In raw mode every digitized sample (electrode address, ADC code) is kept; in
// compressed mode every compressed spike (address, four 6-bit components). The
// selected records are queued in an entry FIFO and counted per sampling period;
// at the end of each period a descriptor (type, timestamp, count) is queued. The
// emitter turns each descriptor into one or more packets of at most RAW_MAX
// samples or CMP_MAX spikes, and register read-back requests into register
// packets, one byte at a time towards the serializer:
//
//   header : start-of-frame 0xA5 | {ASIC address[1:0], length[5:0]} | type
//   raw    : header (type 0x01), timestamp, then per sample: address, code
//   spikes : header (type 0x02), then per spike: timestamp, address,
//            {PC1, PC2, PC3, PC4} packed MSB-first into three bytes
//   register: header (type 0x03, length 1), address, data[15:8], data[7:0]
//
// The field order, the 2-bit ASIC address with 6-bit length, the 6-bit
// components packed across three bytes and the 30 / 12 entries per packet follow
// the authors' packet drawings; the start-of-frame value, type codes, length as
// number of entries and the register packet are this design's. The mode is
// applied at period boundaries so one period's entries are all of one kind.
// When the entry FIFO is full (raw mode with many active channels can exceed the
// 16 Mbit/s link) the record is dropped and overflow_evt pulses.
module packet_builder
  import nr_pkg::*;
#(
  parameter int unsigned RAW_MAX    = 30,
  parameter int unsigned CMP_MAX    = 12,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned DESC_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              compressed,
  input  logic [1:0]        asic_addr,
  input  logic [7:0]        timestamp,
  input  logic              frame_end,
  input  adc_sample_t       raw,
  input  spike_t            spk,
  input  logic              rd_valid,
  input  logic [7:0]        rd_addr,
  input  logic [15:0]       rd_data,
  output logic              byte_valid,
  output logic [7:0]        byte_data,
  input  logic              byte_ready,
  output logic              overflow_evt
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  typedef struct packed {
    logic [7:0]  ts;
    logic [7:0]  addr;
    logic [23:0] payload;
  } entry_t;

  typedef struct packed {
    logic          cmp;
    logic [7:0]    ts;
    logic [CW-1:0] n;
  } desc_t;

  typedef enum logic [1:0] {E_IDLE, E_HDR, E_ENT, E_REG} emit_e;

  // ---------------- collection ----------------
  logic              mode_q;
  logic [CW-1:0]     cnt;
  logic              src_valid;
  entry_t            src;
  logic              e_push, e_pop, e_empty, e_full;
  entry_t            e_head;
  logic              d_push, d_pop, d_empty, d_full;
  desc_t             d_in, d_head;
  logic [$clog2(DESC_DEPTH):0] d_count;
  logic              d_room;

  always_comb begin
    if (mode_q) begin
      src_valid = spk.valid;
      src       = '{ts: timestamp, addr: 8'(spk.addr), payload: spk.pc};
    end else begin
      src_valid = raw.valid;
      src       = '{ts: timestamp, addr: 8'(raw.addr), payload: 24'(raw.amp)};
    end
  end

  // keep one descriptor slot free so the current period can always be closed
  assign d_room       = (32'(d_count) < DESC_DEPTH - 1);
  assign e_push       = src_valid && !e_full && d_room;
  assign overflow_evt = src_valid && !e_push;

  assign d_in   = '{cmp: mode_q, ts: timestamp, n: cnt + CW'(e_push)};
  assign d_push = frame_end && (d_in.n != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= 1'b1;
      cnt    <= '0;
    end else if (frame_end) begin
      mode_q <= compressed;
      cnt    <= '0;
    end else if (e_push) begin
      cnt <= cnt + 1'b1;
    end
  end

  sync_fifo #(.WIDTH($bits(entry_t)), .DEPTH(FIFO_DEPTH)) u_entries (
    .clk, .rst_n, .push(e_push), .wdata(src), .pop(e_pop),
    .rdata(e_head), .empty(e_empty), .full(e_full), .count()
  );

  sync_fifo #(.WIDTH($bits(desc_t)), .DEPTH(DESC_DEPTH)) u_desc (
    .clk, .rst_n, .push(d_push), .wdata(d_in), .pop(d_pop),
    .rdata(d_head), .empty(d_empty), .full(d_full), .count(d_count)
  );

  // ---------------- emission ----------------
  emit_e         st;
  logic [2:0]    bidx;
  logic          cur_cmp;
  logic [7:0]    cur_ts;
  logic [CW-1:0] rem;        // entries of the descriptor not yet sent
  logic [5:0]    pkt_left;   // entries of the current packet not yet sent
  logic          reg_pend;
  logic [7:0]    reg_addr;
  logic [15:0]   reg_data;
  logic [2:0]    hdr_last;
  logic [2:0]    ent_last;
  logic          fire;

  function automatic logic [5:0] pkt_len(input logic c, input logic [CW-1:0] r);
    int unsigned mx;
    mx = c ? CMP_MAX : RAW_MAX;
    return (32'(r) > mx) ? 6'(mx) : 6'(r);
  endfunction

  assign hdr_last = cur_cmp ? 3'd2 : 3'd3;
  assign ent_last = cur_cmp ? 3'd4 : 3'd1;
  assign fire     = byte_valid && byte_ready;

  always_comb begin
    byte_valid = 1'b0;
    byte_data  = '0;
    unique case (st)
      E_HDR: begin
        byte_valid = 1'b1;
        unique case (bidx)
          3'd0:    byte_data = PKT_SOF;
          3'd1:    byte_data = {asic_addr, pkt_left};
          3'd2:    byte_data = cur_cmp ? PKT_CMP : PKT_RAW;
          default: byte_data = cur_ts;
        endcase
      end
      E_ENT: begin
        byte_valid = !e_empty;
        if (cur_cmp) begin
          unique case (bidx)
            3'd0:    byte_data = e_head.ts;
            3'd1:    byte_data = e_head.addr;
            3'd2:    byte_data = e_head.payload[23:16];
            3'd3:    byte_data = e_head.payload[15:8];
            default: byte_data = e_head.payload[7:0];
          endcase
        end else begin
          byte_data = (bidx == 3'd0) ? e_head.addr : e_head.payload[7:0];
        end
      end
      E_REG: begin
        byte_valid = 1'b1;
        unique case (bidx)
          3'd0:    byte_data = PKT_SOF;
          3'd1:    byte_data = {asic_addr, 6'd1};
          3'd2:    byte_data = PKT_REG;
          3'd3:    byte_data = reg_addr;
          3'd4:    byte_data = reg_data[15:8];
          default: byte_data = reg_data[7:0];
        endcase
      end
      default: ;
    endcase
  end

  assign e_pop = (st == E_ENT) && fire && (bidx == ent_last);
  assign d_pop = (st == E_IDLE) && !reg_pend && !d_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= E_IDLE;
      bidx     <= '0;
      cur_cmp  <= 1'b0;
      cur_ts   <= '0;
      rem      <= '0;
      pkt_left <= '0;
      reg_pend <= 1'b0;
      reg_addr <= '0;
      reg_data <= '0;
    end else begin
      if (rd_valid) begin
        reg_pend <= 1'b1;
        reg_addr <= rd_addr;
        reg_data <= rd_data;
      end
      unique case (st)
        E_IDLE: begin
          bidx <= '0;
          if (reg_pend) begin
            st <= E_REG;
          end else if (!d_empty) begin
            st       <= E_HDR;
            cur_cmp  <= d_head.cmp;
            cur_ts   <= d_head.ts;
            rem      <= d_head.n;
            pkt_left <= pkt_len(d_head.cmp, d_head.n);
          end
        end
        E_HDR: if (fire) begin
          if (bidx == hdr_last) begin
            st   <= E_ENT;
            bidx <= '0;
          end else begin
            bidx <= bidx + 1'b1;
          end
        end
        E_ENT: if (fire) begin
          if (bidx == ent_last) begin
            bidx     <= '0;
            rem      <= rem - 1'b1;
            pkt_left <= pkt_left - 1'b1;
            if (pkt_left == 6'd1) begin
              if (rem == CW'(1)) begin
                st <= E_IDLE;
              end else begin
                st       <= E_HDR;
                pkt_left <= pkt_len(cur_cmp, rem - 1'b1);
              end
            end
          end else begin
            bidx <= bidx + 1'b1;
          end
        end
        E_REG: if (fire) begin
          if (bidx == 3'd5) begin
            st       <= E_IDLE;
            bidx     <= '0;
            if (!rd_valid) reg_pend <= 1'b0;
          end else begin
            bidx <= bidx + 1'b1;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(d_push && d_full))
    else $error("packet_builder: descriptor FIFO overrun");
endmodule
