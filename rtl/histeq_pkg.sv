// histeq_pkg: constants and types shared by the histogram-equalisation IP
// (histeq, histeq_channel) and the video enhancement pipeline (vep_top).
//
// The pixel is 24 bits, taken as three 8-bit colour channels. The IP is
// configured through one 32-bit AXI-GPIO output word, of which 25 bits are
// used: 12 bits for the number of rows, 12 bits for the number of columns and
// one reset bit. The widths, the 1080p limit and the 25-of-32 bit budget
// follow the published design; the order of the fields inside the word and
// the active-high sense of the reset bit are this design's choice.
package histeq_pkg;

  localparam int unsigned PIX_W     = 8;     // bits per colour channel
  localparam int unsigned CHANNELS  = 3;     // colour channels per pixel
  localparam int unsigned DATA_W    = PIX_W * CHANNELS;  // 24-bit pixel
  localparam int unsigned ROW_W     = 12;    // width of the row-count field
  localparam int unsigned COL_W     = 12;    // width of the column-count field
  localparam int unsigned MAX_ROWS  = 1080;  // largest frame: 1080p
  localparam int unsigned MAX_COLS  = 1920;
  localparam int unsigned GPIO_W    = 32;    // AXI-GPIO output word

  // Layout of the AXI-GPIO output word: bit 0 is the LSB of rows.
  typedef struct packed {
    logic [GPIO_W-ROW_W-COL_W-2:0] spare;    // [31:25] unused
    logic                          reset;    // [24]    1 = hold IP in reset
    logic [COL_W-1:0]              cols;     // [23:12] active pixels per line
    logic [ROW_W-1:0]              rows;     // [11:0]  active lines per frame
  } gpio_ctrl_t;

  // Bits needed to count every pixel of a frame of rows x cols pixels.
  function automatic int unsigned count_width(int unsigned rows, int unsigned cols);
    return $clog2(rows * cols + 1);
  endfunction

endpackage
