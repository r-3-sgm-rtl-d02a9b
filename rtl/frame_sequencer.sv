// frame_sequencer: pixel-slot timing and frame admission for the stereo pipeline.
//
// The pipeline handles one stereo pixel pair per slot of CYCLES_PER_PIXEL clock
// cycles (three at the default: the per-pixel cost recursion needs three
// cycles). A free-running phase counter marks the slots; `slot_phase[k]` is
// high in cycle k of every slot, so a stage whose data arrives k cycles into a
// slot uses `slot_phase[k]` for its drain steps.
//
// Frames are admitted whole: in ACCEPT the source may hand over one pixel pair
// per slot (`src_ready` is high in phase 0); after NUM_PIXELS pairs the
// sequencer enters DRAIN and refuses input until the pipeline reports the last
// output of the frame on `frame_done`. The drain (a few rows of the image) lets
// the windowed stages finish the frame with padding. This admission rule is a
// choice of this implementation; a camera's vertical blanking normally covers it.
module frame_sequencer #(
  parameter int unsigned CYCLES_PER_PIXEL = r3sgm_pkg::CYCLES_PER_PIXEL,
  parameter int unsigned NUM_PIXELS       = r3sgm_pkg::IMG_WIDTH * r3sgm_pkg::IMG_HEIGHT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        src_valid,
  output logic                        src_ready,
  output logic                        accept,
  input  logic                        frame_done,
  output logic [CYCLES_PER_PIXEL-1:0] slot_phase,
  output logic                        draining
);
  localparam int unsigned CW = r3sgm_pkg::width_of(CYCLES_PER_PIXEL);
  localparam int unsigned NW = r3sgm_pkg::width_of(NUM_PIXELS);

  typedef enum logic { S_ACCEPT, S_DRAIN } state_t;

  state_t        state;
  logic [CW-1:0] phase;
  logic [NW-1:0] count;

  always_comb begin
    slot_phase = '0;
    slot_phase[phase] = 1'b1;
  end

  assign src_ready = (state == S_ACCEPT) && (phase == '0);
  assign accept    = src_valid && src_ready;
  assign draining  = (state == S_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACCEPT;
      phase <= '0;
      count <= '0;
    end else begin
      phase <= (phase == CW'(CYCLES_PER_PIXEL - 1)) ? '0 : phase + 1'b1;
      case (state)
        S_ACCEPT: if (accept) begin
          if (count == NW'(NUM_PIXELS - 1)) begin
            count <= '0;
            state <= S_DRAIN;
          end else begin
            count <= count + 1'b1;
          end
        end
        S_DRAIN: if (frame_done) state <= S_ACCEPT;
        default: state <= S_ACCEPT;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) accept |-> phase == '0)
    else $error("frame_sequencer: pixel accepted outside phase 0");

endmodule
