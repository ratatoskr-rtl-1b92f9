// processing_element -- uniform random traffic source and sink of one tile.
//
// Source: every cycle in which `inject_en` is high a new packet is generated
// with probability INJ_RATE_PERMILLE / (1000 * PKT_LEN), so that the offered
// load is INJ_RATE_PERMILLE/1000 flits per cycle. Generated packets wait in
// a source queue (a counter, `pending`). The packet at the head of the queue
// gets a destination drawn uniformly among all other tiles (a draw that hits
// the own tile is repeated next cycle) and is sent on VC (packet number mod
// NUM_VC) of the router's local input port, one flit per cycle while that VC
// has credits. Flits are: head (payload noc_pkg::head_t: destination,
// source, 8-bit sequence number), PKT_LEN-2 bodies and a tail; body and tail
// carry the cycle in which the head was sent. The pseudo-random numbers come
// from a xorshift32 generator seeded from the tile coordinates and SEED.
//
// Sink: accepts every flit from the router's local output port at once and
// returns its credit in the next cycle. It checks that heads are addressed
// to this tile, that each VC sees head, bodies, tail in order and that every
// packet has PKT_LEN flits; violations count in `errors`. It counts packets
// and flits and sums the network latency (tail arrival cycle minus head send
// cycle) of every packet.
//
// The design's RTL NoC provides processing elements that inject uniform
// random traffic; the generator, the VC choice, the flit payload and the
// checks are this implementation's own.
module processing_element #(
  parameter int unsigned DIM_X             = 4,
  parameter int unsigned DIM_Y             = 4,
  parameter int unsigned DIM_Z             = 4,
  parameter int unsigned NUM_VC            = 4,
  parameter int unsigned DEPTH             = 4,
  parameter int unsigned PKT_LEN           = 32,
  parameter int unsigned INJ_RATE_PERMILLE = 70,
  parameter int unsigned SEED              = 32'h1234_5678
) (
  input  logic             clk,
  input  logic             rst_n,
  input  noc_pkg::coord_t  my_coord,   // own tile position (constant)
  input  logic             inject_en,
  // to the router's local input port
  output noc_pkg::link_t   tx_link,
  input  noc_pkg::credit_t tx_credit,
  // from the router's local output port
  input  noc_pkg::link_t   rx_link,
  output noc_pkg::credit_t rx_credit,
  // statistics
  output logic [31:0]      pkts_sent,
  output logic [31:0]      pkts_recv,
  output logic [31:0]      flits_recv,
  output logic [31:0]      lat_sum,
  output logic [31:0]      lat_max,
  output logic [31:0]      pending,
  output logic [15:0]      errors
);
  import noc_pkg::*;

  localparam int unsigned CW     = $clog2(DEPTH + 1);
  localparam int unsigned LW     = $clog2(PKT_LEN + 1);
  localparam logic [31:0] THRESH = 32'((64'(INJ_RATE_PERMILLE) * 65536) / (64'(1000) * PKT_LEN));

  // ---------------------------------------------------------------- random
  logic [31:0] rnd, cycle;

  function automatic logic [31:0] xorshift(logic [31:0] s);
    s = s ^ (s << 13);
    s = s ^ (s >> 17);
    s = s ^ (s << 5);
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rnd   <= SEED ^ {8'h5a, 8'(my_coord.z), 8'(my_coord.y), 8'(my_coord.x)} ^ 32'h9e37_79b9;
      cycle <= '0;
    end else begin
      rnd   <= xorshift(rnd);
      cycle <= cycle + 1'b1;
    end
  end

  coord_t draw;
  assign draw.x = COORD_W'((32'(rnd[20:16]) * DIM_X) >> 5);
  assign draw.y = COORD_W'((32'(rnd[25:21]) * DIM_Y) >> 5);
  assign draw.z = COORD_W'((32'(rnd[30:26]) * DIM_Z) >> 5);

  // ---------------------------------------------------------------- source
  logic              gen, start, sending, send;
  logic [LW-1:0]     fidx;
  logic [VC_W-1:0]   cur_vc;
  coord_t            cur_dst;
  logic [31:0]       t_inj;
  logic [NUM_VC-1:0][CW-1:0] credits;

  assign gen   = inject_en && (32'(rnd[15:0]) < THRESH);
  assign start = !sending && (pending != 0) && (draw != my_coord);
  assign send  = sending && (credits[cur_vc] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= '0;
      sending   <= 1'b0;
      fidx      <= '0;
      cur_vc    <= '0;
      cur_dst   <= '0;
      t_inj     <= '0;
      pkts_sent <= '0;
    end else begin
      pending <= pending + (gen ? 32'd1 : 32'd0) - (start ? 32'd1 : 32'd0);
      if (start) begin
        sending <= 1'b1;
        fidx    <= '0;
        cur_vc  <= VC_W'(pkts_sent % NUM_VC);
        cur_dst <= draw;
      end else if (send) begin
        if (fidx == 0) t_inj <= cycle;
        if (int'(fidx) == PKT_LEN - 1) begin
          sending   <= 1'b0;
          pkts_sent <= pkts_sent + 1'b1;
        end
        fidx <= fidx + 1'b1;
      end
    end
  end

  always_comb begin
    head_t h;
    h.dst = cur_dst;
    h.src = my_coord;
    h.seq = pkts_sent[7:0];
    tx_link       = '0;
    tx_link.valid = send;
    tx_link.vc    = cur_vc;
    if (PKT_LEN == 1)                  tx_link.flit.ftype = FT_SINGLE;
    else if (fidx == 0)                tx_link.flit.ftype = FT_HEAD;
    else if (int'(fidx) == PKT_LEN-1)  tx_link.flit.ftype = FT_TAIL;
    else                               tx_link.flit.ftype = FT_BODY;
    tx_link.flit.data = (fidx == 0) ? FLIT_W'(h) : FLIT_W'(t_inj);
  end

  for (genvar v = 0; v < NUM_VC; v++) begin : g_cred
    logic dec, inc;
    assign dec = send && (int'(cur_vc) == v);
    assign inc = tx_credit.valid && (int'(tx_credit.vc) == v);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           credits[v] <= CW'(DEPTH);
      else if (dec && !inc) credits[v] <= credits[v] - 1'b1;
      else if (inc && !dec) credits[v] <= credits[v] + 1'b1;
    end
  end

  // ------------------------------------------------------------------ sink
  logic [NUM_VC-1:0] in_pkt;
  logic [LW-1:0]     rx_cnt [NUM_VC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_credit  <= '0;
      in_pkt     <= '0;
      pkts_recv  <= '0;
      flits_recv <= '0;
      lat_sum    <= '0;
      lat_max    <= '0;
      errors     <= '0;
      for (int v = 0; v < NUM_VC; v++) rx_cnt[v] <= '0;
    end else begin
      rx_credit.valid <= rx_link.valid;
      rx_credit.vc    <= rx_link.vc;
      if (rx_link.valid) begin
        automatic int unsigned v   = int'(rx_link.vc) % NUM_VC;
        automatic flit_type_e  ft  = rx_link.flit.ftype;
        automatic head_t       h   = head_t'(rx_link.flit.data);
        automatic logic [31:0] lat = cycle - rx_link.flit.data;
        flits_recv <= flits_recv + 1'b1;
        if (is_head(ft)) begin
          if (in_pkt[v] || h.dst != my_coord) errors <= errors + 1'b1;
          rx_cnt[v] <= LW'(1);
          in_pkt[v] <= !is_tail(ft);
          if (is_tail(ft)) pkts_recv <= pkts_recv + 1'b1;
        end else begin
          if (!in_pkt[v]) errors <= errors + 1'b1;
          rx_cnt[v] <= rx_cnt[v] + 1'b1;
          if (is_tail(ft)) begin
            in_pkt[v] <= 1'b0;
            pkts_recv <= pkts_recv + 1'b1;
            lat_sum   <= lat_sum + lat;
            if (lat > lat_max) lat_max <= lat;
            if (int'(rx_cnt[v]) != PKT_LEN - 1) errors <= errors + 1'b1;
          end
        end
      end
    end
  end

endmodule
