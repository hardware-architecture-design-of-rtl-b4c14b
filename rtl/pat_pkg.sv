// pat_pkg: constants and types shared by the model-based photoacoustic
// reconstruction core.
//
// The core reconstructs a 128 x 128 image from a 128-element ring array.
// Channels are processed 32 at a time ("lanes"), so one pass over all
// channels takes four execution cycles (cc = 0..3, written cc = 1..4 in
// the usual description of the method). Because the ring and the image grid
// share the same centre and mirror axes, only 33 sensors' worth of geometry
// tables are stored (sensors 0..32); the others are reached by mirroring
// the pixel address.
//
// The element count, lane count, 33 stored sets, image size and the table
// precisions (10-bit delay, 10-bit offset, 8-bit amplitude, 8-bit image)
// follow the method. The 16-bit sample width and the 1024-sample depth
// (the range a 10-bit delay can address) are this design's choices.
package pat_pkg;

  localparam int unsigned N_SENS  = 128;  // ring elements
  localparam int unsigned LANES   = 32;   // channels processed in parallel
  localparam int unsigned N_CC    = 4;    // execution cycles per pass
  localparam int unsigned IMG_N   = 128;  // image side in pixels
  localparam int unsigned SAMP_AW = 10;   // log2 of the sampling depth M
  localparam int unsigned S_W     = 16;   // sensor sample width (signed)
  localparam int unsigned DLY_W   = 10;   // DAS delay table precision
  localparam int unsigned OFS_W   = 10;   // s-Wave offset table precision
  localparam int unsigned AMP_W   = 8;    // s-Wave amplitude table precision
  localparam int unsigned PIX_W   = 8;    // normalised image pixel width
  localparam int unsigned NORM_W  = 9;    // DAS output, 0..256
  localparam int unsigned SN_W    = 32;   // s-Wave accumulator width
  localparam int unsigned LR_W    = 16;   // learning rate, unsigned Q8.8
  localparam int unsigned LOSS_W  = 32;   // loss value / threshold width

  // Geometry tables reached through the shared preload bus.
  typedef enum logic [1:0] {
    TBL_DELAY  = 2'd0,  // DAS delay ROMs, 33 sets of IMG_N*IMG_N
    TBL_AMP    = 2'd1,  // s-Wave amplitude ROMs, 33 sets
    TBL_OFFSET = 2'd2,  // s-Wave offset ROMs, 33 sets
    TBL_STD    = 2'd3   // s-Wave standard signal, one set of M samples
  } tbl_sel_e;

  // Channel served by lane `lane` in execution cycle `cc` (q = lanes per cc).
  // cc 0: sensors 0..q-1 directly; cc 1: 2q-1-lane (mirror of stored
  // sensor lane+1); cc 2: 2q+lane (point reflection of sensor lane);
  // cc 3: 4q-1-lane (point reflection of the cc 1 sensor).
  function automatic int unsigned lane_channel(int unsigned cc,
                                               int unsigned lane,
                                               int unsigned q);
    case (cc & 3)
      0:       return lane;
      1:       return 2*q - 1 - lane;
      2:       return 2*q + lane;
      default: return 4*q - 1 - lane;
    endcase
  endfunction

  // Stored table set used by lane `lane` in execution cycle `cc`:
  // set lane in cc 0 and 2, set lane+1 in cc 1 and 3.
  function automatic int unsigned lane_rom(int unsigned cc, int unsigned lane);
    return (cc[0]) ? lane + 1 : lane;
  endfunction

endpackage
