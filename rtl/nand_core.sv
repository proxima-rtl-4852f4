// nand_core: one 3D NAND core with its controller, WL decoder, BL MUX and
// page buffer.
//
// A read request names a page (word line), a first 128-byte segment and a
// segment count. The controller sets up the word line, then for each segment
// selects it through the 32:1 bit-line multiplexer, precharges and senses
// only those 1024 bit lines into the page buffer, and streams the buffer out
// over the 16-bit I/O port (64 beats per segment, io_valid/io_ready). The
// first segment costs T_READ cycles (word-line setup plus sensing; the paper
// states a read latency below 300 ns at a 1 GHz clock); each further segment
// of the same word line costs T_SEG cycles, since the word line is already
// set up. Every beat carries the request's tag and last marks the final beat.
// busy is high from request to last beat; the arbiter sends nothing to a
// busy core. The partial-precharge read, the 32:1 MUX and 128-byte
// granularity are the paper's; T_SEG and the beat format are this design's
// choices.
module nand_core
  import proxima_pkg::*;
#(
  parameter int unsigned PAGES  = 16,
  parameter int unsigned T_READ = 300,
  parameter int unsigned T_SEG  = 100
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  mem_req_t              req,
  output logic                  busy,
  output logic                  io_valid,
  output logic [15:0]           io_data,
  output logic [TAG_W-1:0]      io_tag,
  output logic                  io_seg_last, // last beat of a segment
  output logic                  io_last,     // last beat of the request
  input  logic                  io_ready,
  input  logic                  prog_en,
  input  logic [PAGE_W-1:0]     prog_page,
  input  logic [SEG_W-1:0]      prog_seg,
  input  logic [GRAN_BITS-1:0]  prog_data
);
  typedef enum logic [1:0] {C_IDLE, C_SENSE, C_LATCH, C_STREAM} cst_e;
  cst_e st;

  logic [PAGE_W-1:0]    page_q;
  logic [SEG_W-1:0]     seg_q;
  logic [5:0]           left_q;
  logic [TAG_W-1:0]     tag_q;
  logic [15:0]          tmr;
  logic [5:0]           beat;
  logic [GRAN_BITS-1:0] page_buf;
  logic [GRAN_BITS-1:0] sense_data;
  logic                 sense;

  assign sense = (st == C_SENSE) && (tmr == 16'd1);

  nand_array #(.PAGES(PAGES), .MUX(MUX_RATIO), .SEG_BITS(GRAN_BITS)) u_array (
    .clk, .sense, .wl_page(page_q), .bl_sel(seg_q), .sense_data,
    .prog_en, .prog_page, .prog_seg, .prog_data);

  assign busy        = (st != C_IDLE);
  assign io_valid    = (st == C_STREAM);
  assign io_data     = page_buf[16*beat +: 16];
  assign io_tag      = tag_q;
  assign io_seg_last = (beat == 6'd63);
  assign io_last     = (beat == 6'd63) && (left_q == 6'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; page_q <= '0; seg_q <= '0; left_q <= '0; tag_q <= '0;
      tmr <= '0; beat <= '0;
    end else begin
      unique case (st)
        C_IDLE: if (req_valid) begin
          page_q <= req.page; seg_q <= req.seg; left_q <= req.nseg; tag_q <= req.tag;
          tmr <= 16'(T_READ); st <= C_SENSE;
        end
        C_SENSE: begin
          tmr <= tmr - 16'd1;
          if (tmr == 16'd1) st <= C_LATCH;
        end
        C_LATCH: begin
          page_buf <= sense_data; beat <= '0; st <= C_STREAM;
        end
        C_STREAM: if (io_ready) begin
          beat <= beat + 6'd1;
          if (beat == 6'd63) begin
            if (left_q == 6'd1) st <= C_IDLE;
            else begin
              left_q <= left_q - 6'd1; seg_q <= seg_q + 1'b1;
              tmr <= 16'(T_SEG); st <= C_SENSE;
            end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
