// sfp_codec_top: the container (de)compression layer of a training accelerator.
//
// Sits between the accelerator's on-chip buffers and its memory controller.
// There are N_CHANNELS memory channels with UNITS_PER_CHANNEL units each;
// unit u = ch*UNITS_PER_CHANNEL + k. Every unit has a write path and a read
// path, independent of each other and of the other units:
//
//   write: FP32 rows -> compressor -> compressed rows        -> memory
//                                  -> widths -> meta_packer  -> memory
//   read:  memory -> compressed rows  -> decompressor -> FP32 rows
//          memory -> metadata words -> meta_unpacker -^
//
// Ending a tensor on the write path: a wr_flush pulse (while wr_flush_busy is
// low) first makes the compressor emit its partly filled row, then, once the
// compressor's last width has reached the metadata packer, makes the packer
// emit its partly filled word; wr_flush_done pulses when both are out. Rows
// are not accepted meanwhile. On the read path rd_clear drops the padding
// left from the previous tensor in the decompressor and the metadata unpacker.
//
// Rows are ROW_LANES x 32 bits, lane i in bits [32i+31:32i]; all streams use
// valid/ready. man_width and sign_en select the stored format per unit and
// must be held for a whole tensor. Reset: synchronous, active low.
//
// Eight channels with two compressor/decompressor units each, 8-value rows and
// the 3b/5b width inputs follow the paper; the flush sequence, rd_clear and
// the metadata word format are this design's choices.
module sfp_codec_top
  import sfp_pkg::*;
#(
  parameter int unsigned N_CHANNELS        = 8,
  parameter int unsigned UNITS_PER_CHANNEL = 2,
  parameter int unsigned BIAS              = DEFAULT_BIAS,
  parameter int unsigned META_W            = 256,
  localparam int unsigned NU = N_CHANNELS * UNITS_PER_CHANNEL
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // write path: uncompressed rows from the on-chip buffers
  input  logic [NU-1:0]                      wr_in_valid,
  output logic [NU-1:0]                      wr_in_ready,
  input  logic [NU-1:0][ROW_LANES-1:0][FP_W-1:0] wr_in_data,
  input  logic [NU-1:0][MWID_W-1:0]          wr_man_width,
  input  logic [NU-1:0]                      wr_sign_en,
  input  logic [NU-1:0]                      wr_flush,
  output logic [NU-1:0]                      wr_flush_busy,
  output logic [NU-1:0]                      wr_flush_done,
  // write path: to the memory controller
  output logic [NU-1:0]                      wr_data_valid,
  input  logic [NU-1:0]                      wr_data_ready,
  output logic [NU-1:0][ROW_LANES-1:0][FP_W-1:0] wr_data,
  output logic [NU-1:0]                      wr_meta_valid,
  input  logic [NU-1:0]                      wr_meta_ready,
  output logic [NU-1:0][META_W-1:0]          wr_meta,
  // read path: from the memory controller
  input  logic [NU-1:0]                      rd_data_valid,
  output logic [NU-1:0]                      rd_data_ready,
  input  logic [NU-1:0][ROW_LANES-1:0][FP_W-1:0] rd_data,
  input  logic [NU-1:0]                      rd_meta_valid,
  output logic [NU-1:0]                      rd_meta_ready,
  input  logic [NU-1:0][META_W-1:0]          rd_meta,
  input  logic [NU-1:0][MWID_W-1:0]          rd_man_width,
  input  logic [NU-1:0]                      rd_sign_en,
  input  logic [NU-1:0]                      rd_clear,
  // read path: FP32 rows to the on-chip buffers
  output logic [NU-1:0]                      rd_out_valid,
  input  logic [NU-1:0]                      rd_out_ready,
  output logic [NU-1:0][ROW_LANES-1:0][FP_W-1:0] rd_out_data
);
  typedef enum logic [1:0] {FL_IDLE, FL_DATA, FL_META} flush_state_e;

  for (genvar u = 0; u < NU; u++) begin : g_unit
    flush_state_e       fl_q;
    logic               c_in_valid, c_in_ready, c_flush, c_flush_ack;
    logic               c_w_valid, c_w_ready;
    logic [WCODE_W-1:0] c_w;
    logic               m_flush, m_flush_ack;
    logic               d_w_valid, d_w_ready;
    logic [WCODE_W-1:0] d_w;

    // ---------------- write path ----------------
    assign c_in_valid       = wr_in_valid[u] && (fl_q == FL_IDLE);
    assign wr_in_ready[u]   = c_in_ready && (fl_q == FL_IDLE);
    assign c_flush          = (fl_q == FL_DATA);
    assign m_flush          = (fl_q == FL_META) && !c_w_valid;
    assign wr_flush_busy[u] = (fl_q != FL_IDLE);
    assign wr_flush_done[u] = m_flush_ack;

    always_ff @(posedge clk) begin
      if (!rst_n) fl_q <= FL_IDLE;
      else begin
        unique case (fl_q)
          FL_IDLE: if (wr_flush[u])  fl_q <= FL_DATA;
          FL_DATA: if (c_flush_ack)  fl_q <= FL_META;
          FL_META: if (m_flush_ack)  fl_q <= FL_IDLE;
          default:                   fl_q <= FL_IDLE;
        endcase
      end
    end

    compressor #(.LANES(ROW_LANES), .BIAS(BIAS)) u_comp (
      .clk, .rst_n,
      .in_valid  (c_in_valid),
      .in_ready  (c_in_ready),
      .data_in   (wr_in_data[u]),
      .man_width (wr_man_width[u]),
      .sign_en   (wr_sign_en[u]),
      .flush     (c_flush),
      .flush_ack (c_flush_ack),
      .out_valid (wr_data_valid[u]),
      .out_ready (wr_data_ready[u]),
      .data_out  (wr_data[u]),
      .w_valid   (c_w_valid),
      .w_ready   (c_w_ready),
      .w         (c_w));

    meta_packer #(.WORD_W(META_W)) u_mpack (
      .clk, .rst_n,
      .w_valid   (c_w_valid),
      .w_ready   (c_w_ready),
      .w         (c_w),
      .flush     (m_flush),
      .flush_ack (m_flush_ack),
      .out_valid (wr_meta_valid[u]),
      .out_ready (wr_meta_ready[u]),
      .out_data  (wr_meta[u]));

    // ---------------- read path ----------------
    meta_unpacker #(.WORD_W(META_W)) u_munpack (
      .clk, .rst_n,
      .clear     (rd_clear[u]),
      .in_valid  (rd_meta_valid[u]),
      .in_ready  (rd_meta_ready[u]),
      .in_data   (rd_meta[u]),
      .w_valid   (d_w_valid),
      .w_ready   (d_w_ready),
      .w         (d_w));

    decompressor #(.LANES(ROW_LANES), .BIAS(BIAS)) u_decomp (
      .clk, .rst_n,
      .clear     (rd_clear[u]),
      .in_valid  (rd_data_valid[u]),
      .in_ready  (rd_data_ready[u]),
      .data_in   (rd_data[u]),
      .w_valid   (d_w_valid),
      .w_ready   (d_w_ready),
      .exp_width (d_w),
      .man_width (rd_man_width[u]),
      .sign_en   (rd_sign_en[u]),
      .out_valid (rd_out_valid[u]),
      .out_ready (rd_out_ready[u]),
      .data_out  (rd_out_data[u]));
  end
endmodule
