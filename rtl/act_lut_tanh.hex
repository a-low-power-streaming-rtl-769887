0b0
0b1
0b2
0b3
0b4
0b5
0b6
0b7
0b8
0b9
0ba
0bb
0bc
0bd
0be
0bf
0c0
0c1
0c2
0c3
0c4
0c5
0c6
0c7
0c8
0c9
0ca
0cb
0cc
0cd
0cd
0ce
0cf
0d1
0d2
0d2
0d3
0d4
0d5
0d6
0d7
0d8
0d9
0da
0da
0db
0dc
0dd
0de
0df
0e0
0e1
0e2
0e2
0e3
0e4
0e4
0e5
0e5
0e6
0e7
0e7
0e7
0e8
0e8
0e9
0ea
0eb
0eb
0ec
0ec
0ed
0ed
0ed
0ee
0ee
0ee
0ee
0ef
0ef
0ef
0ef
0ef
0ef
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
0f0
2b0
2b1
2b2
2b3
2b4
2b5
2b6
2b7
2b8
2b9
2ba
2bb
2bc
2bd
2be
2bf
2c0
2c1
2c2
2c3
2c4
2c5
2c6
2c7
2c8
2c9
2ca
2cb
2cc
2cd
2cd
2ce
2cf
2d1
2d2
2d2
2d3
2d4
2d5
2d6
2d7
2d8
2d9
2da
2da
2db
2dc
2dd
2de
2df
2e0
2e1
2e2
2e2
2e3
2e4
2e4
2e5
2e5
2e6
2e7
2e7
2e7
2e8
2e8
2e9
2ea
2eb
2eb
2ec
2ec
2ed
2ed
2ed
2ee
2ee
2ee
2ee
2ef
2ef
2ef
2ef
2ef
2ef
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
2f0
