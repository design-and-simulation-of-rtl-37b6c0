# An 8-bit CORDIC sine/cosine processor

This design computes the sine and the cosine of an angle at the same time. It uses no multiplier. It applies the CORDIC method (COordinate Rotation DIgital Computer): it rotates the vector (1/A, 0) by the requested angle in a series of ever smaller steps. Step *i* turns the vector by ±atan(2^-i). That angle has the tangent 2^-i, so one step takes two shifts, two additions or subtractions, and a third addition that keeps track of the angle still left to turn. After *N* steps the vector's x and y are the cosine and the sine.

The RTL follows the paper "Design and Simulation of an 8-bit Dedicated Processor for calculating the Sine and Cosine of an Angle using the CORDIC Algorithm" (Chadha, Jyoti, Bhatia). The algorithm, the pins of the chip and the component kinds come from that paper. Much of the detail comes from this implementation and is marked as such below. The paper gives the equations, a block diagram, a state diagram and a control-word table, but no RTL.

## Two machines on one chip

The paper describes its processor in two ways that cannot both be right:

* **The architecture section** has a datapath with two 8-bit registers X and Y, input multiplexers, operand multiplexers, one ALU, a comparator (X = Y, X > Y) and a tristate output of X. A six-state control unit (S0–S5) runs it. The control word fixes the ALU on subtract, loads X with X − Y when X > Y and Y with Y − X when X < Y, and stops when X = Y. This is Euclid's subtractive algorithm: the result is gcd(X, Y). It cannot produce a sine.
* **The implementation section** shows a block called `cordic`. Its pins are `angle(7:0)`, `angle_valid`, `clk`, `rstn`, `cosout(7:0)`, `sinout(7:0)` and `ready`. Its results match the CORDIC equations. These 28 pins are also the 28 I/O pins of the paper's synthesis report.

This RTL builds both:

* `cordic` is the top level. Its CORDIC engine (`cordic_control` and `cordic_datapath`) has the pins of the `cordic` block. It is assembled from the same component kinds as the architecture section (multiplexers, registers with load and clear, ALUs, comparators, tristate buffers) plus the arctangent table. It is sequenced by the same six-state graph.
* `dedicated_processor` (`control_unit` and `datapath`) is the two-register machine, exactly as drawn and tabulated. It sits inside `cordic` on separate pins: `dp_input_x`, `dp_input_y`, `dp_output` and `dp_done`. Its reset is `!rstn`. It shares nothing with the CORDIC engine except the clock. If you only want the sine/cosine unit, drop the `u_proc` instance and the `dp_*` pins.

## The rotation engine

### Number formats

| quantity | format | notes |
|---|---|---|
| `angle` input | 8-bit binary angle, 256 units per turn | 64 = π/2, 128 = π (as signed, −128 = −π) |
| z (residual angle) | `Z_W` = 32-bit binary angle, 2^32 per turn | wraps modulo 2π, as the pre-rotation needs |
| x, y | `XY_W` = 17-bit two's complement, 2 integer bits, 15 fraction bits | 1.0 = 32768 |
| `cosout`, `sinout` | signed Q1.6, 8 bits | 1.0 = 64; rounded to nearest, saturated |

A binary angle makes the 2π wrap-around free, and it turns the test for second and third quadrant angles into a test on two bits. All three formats were chosen for this design. The paper fixes only the 8-bit width of the pins and shows 17-bit x and y in its simulation.

### Start vector and the pre-rotation by π

Without help, the iterations converge only for |z| ≤ about 1.74 rad. Angles in the second and third quadrants are therefore turned by π first (the "0 or π" reduction of the paper). When bits 7 and 6 of the angle differ, bit 7 is flipped, which subtracts π. The start vector is negated at the same time: x0 = −K instead of +K, with y0 = 0. The remaining angle lies in [−π/2, π/2).

K = 1/A_N = ∏_{i=0}^{N−1} 1/√(1 + 2^−2i) is the inverse of the CORDIC gain for N = `ITERATIONS` steps. It is applied by loading K as the start value of x. No scaling multiply is needed afterwards. `cordic_pkg::gain32(N)` holds round(K·2^32), which reaches 0.6072529350 from N = 17 on. The datapath rounds it to 15 fraction bits.

### One step

With the counter value i and d = +1 when z ≥ 0, −1 otherwise:

    x ← x − d·(y >>> i)
    y ← y + d·(x >>> i)
    z ← z − d·atan(2^−i)
    i ← i + 1

Three ALUs do the three additions. Their operation is add or subtract, depending on d. A fourth ALU increments the counter. The shifts are arithmetic and truncate. `atan_rom` returns atan(2^−i) as round(atan(2^−i)/(2π)·2^32), rounded to `Z_W` bits. The table has 31 non-zero entries. Two comparators produce the status bits: `neq0` (counter = `ITERATIONS`) and `neq1` (z ≥ 0, signed).

### Sequencing: the six states

Both machines use one state graph, taken from the paper's state diagram. Only the meaning of the states differs:

| state | CORDIC engine (`cordic_control`) | two-register machine (`control_unit`) |
|---|---|---|
| S5 | clear registers; wait for `angle_valid`, capture `angle` | clear registers (held while reset) |
| S0 | load x0 = ±K, y0 = 0, z0 = reduced angle, i = 0 | load X and Y from the inputs |
| S1 | test: `neq0` → S4, `neq1` → S2, else S3 | same test: X = Y → S4, X > Y → S2, else S3 |
| S2 | rotation step with d = +1, → S1 | X ← X − Y, → S1 |
| S3 | rotation step with d = −1, → S1 | Y ← Y − X, → S1 |
| S4 | enable the output buffers, `ready` = 1, → S5 | OE = 1, Done = 1, → S5 |

The paper's diagram does not show where S4 goes. Both machines here return to S5. The CORDIC engine then waits for the next angle. The two-register machine reloads its inputs and computes again, so with steady inputs `dp_done` pulses every 3 + 2·(number of subtractions) clocks.

Both machines spend two clocks per step: one to test, one to update. A faster variant would let S1 steer the update directly. That would break with the paper's state graph, so it was not done here.

## Interface and timing of `cordic`

* `rstn`: asynchronous and active low. It forces both controllers into S5.
* `angle_valid`: sampled on every rising edge while the engine is idle in S5. The edge that sees it high captures `angle`. After that edge the `angle` pins may change.
* `ready`: goes high exactly 2·`ITERATIONS` + 3 clocks after the sampling edge (35 clocks at the default 16). It stays high for one clock. `cosout` and `sinout` carry the result during that clock only. At all other times they are high impedance, because they are driven through tristate buffers as in the paper's diagram. Register the outputs on `ready` if you need them longer.
* The next `angle_valid` is accepted from the clock after `ready`. If `angle_valid` is held high, a new angle is taken every 2·`ITERATIONS` + 4 clocks.

## Accuracy

Results from `tb_cordic_table5` for the angles and step counts of the paper's evaluation. An angle enters as the nearest 8-bit binary angle, so 0.523599 rad becomes 21/256 of a turn (0.5154 rad) and 1 rad becomes 41/256 (1.0063 rad). The errors are measured against sine and cosine of that quantized angle, using the full-precision x and y registers:

| angle (code) | steps | sin error | cos error | `sinout`, `cosout` |
|---|---|---|---|---|
| 0 (0) | 5 | −1.49e−2 | 1.2e−4 | 1, 64 |
| 0 (0) | 10 | −1.16e−3 | 0 | 0, 64 |
| 0 (0) | 15 | 0 | −6.1e−5 | 0, 64 |
| 0.5154 (21) | 5 | 9.3e−3 | −5.1e−3 | 31, 56 |
| 0.5154 (21) | 15 | 7.0e−5 | −6.1e−5 | 32, 56 |
| 1.0063 (41) | 5 | −3.0e−2 | 5.1e−2 | 56, 31 |
| 1.0063 (41) | 15 | −5.6e−5 | 5.5e−5 | 54, 34 |
| π (128) | 5 | 1.48e−2 | −1.2e−4 | −1, −64 |
| π (128) | 15 | −3.1e−5 | 1.2e−4 | 0, −64 |

At 5 steps the angle error of the method dominates: up to atan(2^−4) ≈ 0.06. For angle 0 the values agree with the paper's to three digits (sin 0.01486 here against 0.01484 there, cos 0.99988 against 0.99989). From about 12 steps on, the 15 fraction bits of x and y set the floor at a few 1e−5. From step 16 on, the shifted operands are only 0 or −1, so further steps add truncation noise instead of accuracy. The paper's errors near 1e−6 at 20 steps need wider registers. With `XY_W` = 26 (24 fraction bits) and 20 steps, the same testbench measures errors between 4e−8 and 1e−6 for the four angles (sin 0 = −3.6e−7, against −4.3e−7 in the paper). The 8-bit outputs are within one Q1.6 step (1/64) of the exact value for all 256 angles at the default settings.

## The two-register processor

`datapath` follows the paper's block diagram. Input multiplexers choose between the pins (`in_x`/`in_y` = 1) and the ALU result. The registers have `xload`/`yload` and `clear`. An operand multiplexer pair swaps the ALU inputs: `xy` = 1 gives X − Y, `xy` = 0 gives Y − X. A comparator on X and Y (unsigned) drives `neq0` and `neq1`, and X goes out through the tristate buffer. `control_unit` produces the control word of the paper's table:

| state | In_X | In_Y | XLoad | YLoad | XY | Clear | ALU | OE | Done |
|---|---|---|---|---|---|---|---|---|---|
| S0 | 1 | 1 | 1 | 1 | 0 | 0 | 101 | 0 | 0 |
| S1 | 0 | 0 | 0 | 0 | 0 | 0 | 101 | 0 | 0 |
| S2 | 0 | 0 | 1 | 0 | 1 | 0 | 101 | 0 | 0 |
| S3 | 0 | 0 | 0 | 1 | 0 | 0 | 101 | 0 | 0 |
| S4 | 0 | 0 | 0 | 0 | 0 | 0 | 101 | 1 | 1 |
| S5 | 1 | 1 | 0 | 0 | 0 | 1 | 101 | 0 | 0 |

For non-zero inputs the result is gcd(X, Y), after 3 + 2·s clocks from leaving reset, where s is the number of subtractions. If exactly one input is zero, the machine never stops: it keeps subtracting zero. The paper does not cover that case, and the RTL does not guard against it.

The ALU has a 3-bit select. The paper only ever uses 101 (subtract). The other codes are this design's choice: 000 pass A, 001 AND, 010 OR, 011 NOT A, 100 A + B, 110 A + 1, 111 A − 1. The CORDIC engine uses 100, 101 and 110.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `IO_W` | 8 | `cordic`, `cordic_datapath` | width of `angle`, `cosout`, `sinout`, `dp_*` |
| `XY_W` | 17 | `cordic`, `cordic_datapath` | width of x and y (2 integer bits) |
| `Z_W` | 32 | `cordic`, `cordic_datapath`, `atan_rom` | width of the angle register (≤ 32) |
| `ITERATIONS` | 16 | `cordic`, `cordic_datapath` | CORDIC steps per result |
| `WIDTH` | 8 | leaf modules, `datapath`, `dedicated_processor` | data width |

The output rounding assumes `XY_W − 2 > IO_W − 2`, so x and y must carry more fraction bits than the outputs. The counter width follows from `ITERATIONS`.

## Departures from the paper and open points

* The paper's architecture cannot compute a sine. It is kept as a separate unit, and the CORDIC engine is this design's own arrangement of the paper's component kinds. The top level therefore has 26 pins more than the paper's 28.
* Data formats, the angle encoding, the `angle_valid`/`ready` handshake, the latency, the number of steps (16), the synchronous clear and the asynchronous resets are this design's choices. So is the exit of S4. The paper gives none of them.
* The paper's synthesis figures (81.353 MHz on a Spartan-3, 126 slices, 58 flip-flops) are not reproduced. This RTL has 107 flip-flops, mostly the 32-bit angle register and the 17-bit x and y.
* The paper also shows a generic one-register datapath, with a multiplexer of the data input and a constant 1, an ALU, a register and a tristate output. The processor never uses it, and it is not built here.

## Files

`rtl/` holds one module or package per file:

* `cordic_pkg`: ALU codes, state names, the arctangent and gain constants.
* Leaf modules: `mux2`, `register_unit`, `alu`, `comparator`, `tristate_buffer` and `atan_rom`.
* The CORDIC engine: `cordic_datapath` and `cordic_control`.
* The two-register machine: `datapath`, `control_unit` and `dedicated_processor`.
* The top level: `cordic`.

`tb/` holds a self-checking testbench `tb_<module>` for each module, plus `tb_cordic_table5`, which runs the angle and step-count sweep above. Each testbench prints `TB_RESULT checks=N failures=M`.

* `tb_cordic` runs the top at its default parameters. It checks all 256 angles, the latency, the one-clock `ready`, that the outputs are released between results, and back-to-back operation. It also checks the gcd unit on its pins.
* `tb_cordic_datapath` plays the controller itself and compares the full-precision registers with real sine and cosine.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
        -Irtl -y rtl rtl/cordic_pkg.sv tb/tb_cordic.sv --top-module tb_cordic -o sim
    ./obj_dir/sim

Replace `tb_cordic` with any other testbench name. Every testbench finishes in well under a second of wall time.
