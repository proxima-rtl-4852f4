// gap_decoder: frame buffer and neighbour-list decoder of one search queue.
//
// Graph frames arrive from the 3D NAND cores as 128-byte granules and are
// written in order into a small frame buffer (gran_we). The decoder then
// walks the frame bit by bit, least significant bit first:
//   normal frame: i_1 (w0 bits), g_2 .. g_R (wgap bits each), PQ(v)
//   hot frame:    i_1, PQ(n_1), g_2, PQ(n_2), ..., g_R, PQ(n_R), PQ(v)
// Neighbour ids are gap encoded: the list was sorted and each id after the
// first is stored as its difference to the previous one, with one gap width
// for the whole graph, so n_k = n_(k-1) + g_k. Hot frames repeat each
// neighbour's 256-bit PQ code next to its id, so no further fetch is needed.
// The frame's own PQ code at the end is not emitted.
// Handshake: after start, each field appears on out_valid with out_is_pq
// telling an id from a PQ code; it advances when out_ready is high. done
// pulses after the last field. The extract port returns 256 bits starting
// at any bit position of the buffer (used for PQ codes fetched by id), and
// raw_pair shows granules FMAX-4 and FMAX-3, where raw vectors are loaded.
// The field order follows the paper's figure of the two frame formats; bit
// order (LSB first) and the buffer size are this design's choices.
module gap_decoder
  import proxima_pkg::*;
#(
  parameter int unsigned FMAX = 32        // granules in the frame buffer
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          gran_we,
  input  logic [$clog2(FMAX)-1:0]       gran_addr,
  input  logic [GRAN_BITS-1:0]          gran_data,
  input  logic                          start,
  input  logic                          hot,
  input  logic [6:0]                    r_deg,
  input  logic [5:0]                    w0,
  input  logic [5:0]                    wgap,
  output logic                          out_valid,
  output logic                          out_is_pq,
  output vid_t                          out_vid,
  output logic [PQ_BITS-1:0]            out_pq,
  input  logic                          out_ready,
  output logic                          done,
  input  logic [$clog2(FMAX)+9:0]       ext_pos,
  output logic [PQ_BITS-1:0]            ext_pq,
  output logic [2*GRAN_BITS-1:0]        raw_pair
);
  localparam int unsigned PW = $clog2(FMAX) + 10;
  localparam int unsigned GW = $clog2(FMAX);

  logic [GRAN_BITS-1:0] fbuf [FMAX];
  always_ff @(posedge clk) if (gran_we) fbuf[gran_addr] <= gran_data;

  function automatic logic [PQ_BITS-1:0] field_at(logic [PW-1:0] pos);
    logic [GW-1:0] g0, g1;
    logic [2*GRAN_BITS-1:0] win;
    g0  = pos[PW-1:10];
    g1  = g0 + 1'b1;
    win = {fbuf[g1], fbuf[g0]} >> pos[9:0];
    return win[PQ_BITS-1:0];
  endfunction

  assign ext_pq   = field_at(ext_pos);
  assign raw_pair = {fbuf[FMAX-3], fbuf[FMAX-4]};

  logic [PW-1:0] pos_q;
  logic          busy, hot_q, nxt_pq;
  logic [6:0]    cnt_q;          // neighbour ids emitted so far
  vid_t          prev_q;
  logic [PQ_BITS-1:0] fld;
  logic [31:0]   msk;
  logic [5:0]    width;

  always_comb begin
    fld   = field_at(pos_q);
    width = (cnt_q == 0) ? w0 : wgap;
    msk   = (width >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << width) - 32'd1);
    out_valid = busy;
    out_is_pq = nxt_pq;
    out_pq    = fld;
    if (cnt_q == 0) out_vid = VID_W'(fld[31:0] & msk);
    else            out_vid = prev_q + VID_W'(fld[31:0] & msk);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; hot_q <= 1'b0; nxt_pq <= 1'b0; cnt_q <= '0;
      pos_q <= '0; prev_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; hot_q <= hot; nxt_pq <= 1'b0; cnt_q <= '0; pos_q <= '0;
        end
      end else if (out_ready) begin
        if (nxt_pq) begin
          pos_q  <= pos_q + PW'(PQ_BITS);
          nxt_pq <= 1'b0;
          if (cnt_q == r_deg) begin busy <= 1'b0; done <= 1'b1; end
        end else begin
          pos_q  <= pos_q + PW'(width);
          prev_q <= out_vid;
          cnt_q  <= cnt_q + 7'd1;
          if (hot_q) nxt_pq <= 1'b1;
          else if (cnt_q + 7'd1 == r_deg) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end
endmodule
