# TerEffic: a ternary-LLM inference card in SystemVerilog

This is synthesizable SystemVerilog for one card of the fully on-chip
TerEffic accelerator. The accelerator runs the decoder layers of a
MatMul-free (ternary-weight) language model. Each card holds all the
weights of its share of the layers in on-chip memory. It computes a token
with a 256-lane ternary matrix core, an RMSNorm unit and an element-wise
activation unit. Activations move in and out on a stream port, which stands
in for the inter-card transceiver link. Two cards, each with 12 of the 24
layers, run the 370M-parameter model.

## Datapath

Every vector is a stream of *tiles* of 256 int8 values, one tile per clock.
Activations use Q3.4 fixed point and are clamped to [-127, 127].

- **Weight memory** (`weight_mem`, URAM in the paper). Each row is one
  256 x 256 ternary tile in 1.6-bit form: 256 columns of 52 bytes, with
  five weights per byte. One row is read per cycle. The default 2352 rows
  hold 12 layers of the 370M model.
- **Ternary decoder** (`ternary_decoder`, `trit5_decode`). This unpacks
  each byte into five 2-bit weights (01 = +1, 11 = -1, 00 = 0). A byte
  holds q = ceil(v * 256 / 243), where v is the base-3 number of the five
  weights. Each weight comes out by multiplying by three (`q + (q << 1)`)
  and taking the top two bits, so only shifts, adds and masks are used.
  This code reproduces the worked example {-1,0,0,1,1} -> 10001100 given
  for the format.
- **TMat core** (`tmat_core`, `tdot`, `tmul`).
  - There are 256 TDot units, one per output column. Each has 256 TMul
    selectors (x, -x or 0).
  - Each TDot also has an 8-level registered adder tree and an accumulator
    over input tiles.
  - -X is computed once and shared by all units.
  - A K x N tiled product takes K*N cycles plus 8 for the adder tree. For
    example, a 1024 x 1024 matrix takes 4 x 4 + 8 = 24 cycles.
  - The accumulator is requantised to int8 as clamp(acc >>> shift).
- **RMSNorm** (`rmsnorm`, `int_sqrt`, `recip_lut`).
  - While the tiles stream in, the unit sums x^2 and buffers x * w.
  - It then forms the mean plus epsilon and takes a sequential integer
    square root, giving r with 6 fractional bits.
  - 1/r comes from a look-up table, so the unit multiplies and never
    divides.
  - Last, it scales the buffered products.
- **Activation unit** (`act_func`, `sigmoid_lut`). This works element-wise
  on tiles: add, subtract, product, sigmoid (a 256-entry table), 1 - a and
  copy. Every result saturates.
- **Residual adder** (`residual_add`). This adds a matrix result into the
  residual stream.
- **Vector buffers** (`vec_buffer`, BRAM). There are five of them:
  - activation buffer (RMSNorm to TMat)
  - scratch buffer (TMat results and temporaries, two read ports)
  - output buffer (the residual stream)
  - hidden-state buffer (16 batch sequences x 64 tiles)
  - norm-weight buffer

## Control

The paper gives the datapath but not its sequencing. The controller is my
own design, and `tereffic_top` holds it.

- The host writes a small program of `op_t` records: LOAD, NORM, TMAT, ACT,
  RESID, SEND and END.
- Per token, the host pulses `start` with a batch index, and the card pulses
  `done` when it is finished.
- Operations run one at a time, one tile per cycle. Each drains before the
  next starts.
- Hidden-state addresses are offset by the batch index, so up to 16
  sequences keep separate recurrent state.
- One layer takes 30 to 35 operations: an HGRN token mixer (three
  projections, sigmoid gates, the recurrence h = f*h + (1-f)*i, and an
  output projection) and a GLU channel mixer, each with a residual. The
  testbench package shows the exact program.

All host load ports (program, weights, norm weights), the start/done
handshake and the two streams are plain signals on the top.

## Verification

Each block has a self-checking testbench in `tb/`, checked against
reference arithmetic. `tereffic_model_pkg` holds a bit-exact reference
model of a card.

- `tb_tereffic_top` chains two cards at 16 lanes, with two layers each and
  the tile counts of the 370M model.
  - It runs two batch sequences for two tokens each.
  - It compares every tile sent between the cards and every output tile
    with the model.
  - It checks the cycle count of every matrix operation.
  - It checks that every opcode, every activation function, multi-tile
    accumulation, output back-pressure and per-batch state all occurred.
- `tb_tereffic_full` runs one card at its default parameters (256 lanes).
  It runs one 370M-sized layer, 196 weight tiles, and checks every output
  tile and the 27-cycle 4 x 4 matrix operation.
- `tb_tmat_core` runs the matrix core at its full 256 lanes and checks the
  24-cycle latency.

## Where this follows the paper and where it does not

Taken from the paper:

- the 256-lane TMat core with shared -X and its 4 x 4 + 8 latency
- the 2-bit weight code and the 1.6-bit, five-per-byte packing
- RMSNorm by square root and a 1/r look-up table
- the sigmoid table and the add/subtract/product operations
- the BRAM vector buffers, URAM weights and residual path
- the 16-batch hidden state
- two cards x 12 layers for the 370M model

My own choices:

- the Q3.4 and Q1.6 number formats and the requantisation shifts
- epsilon, and the table sizes
- the program controller and its operation format
- operations that run one after another rather than overlapping
- one stream port for both the token input and the link from the previous
  card; both load the output buffer
- a single scratch buffer with two read ports in place of the two
  TMat-side buffers drawn in the block diagram
- the feed-forward sizes (2816, 5632 and 6912 for the 370M, 1.3B and 2.7B
  models), which the paper does not state

Not built:

- The GTY transceivers and QSFP28 link. These are vendor hard IP; the top
  brings out a valid/ready tile stream in their place.
- The HBM-assisted variant for the 1.3B and 2.7B models. This covers the
  HBM and its controller (vendor IP), the dual-clock HBM weight FIFO and
  batch-parallel grouping. A card as built holds 2352 weight tiles. The
  1.3B model needs 18,816 and the 2.7B model needs 38,720, so they do not
  fit without HBM.
- The pipelining of one operation into the next, which the throughput
  figures of the paper imply. Operations here drain before the next
  starts, so this design is slower per token than the paper's
  implementation.
