0e0
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e1
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e2
0e3
0e3
0e3
0e3
0e3
0e3
0e3
0e3
0e4
0e4
0e4
0e4
0e4
0e4
0e5
0e5
0e5
0e5
0e6
0e6
0e6
0e6
0e6
0e7
0e7
0e7
0e7
0e7
0e8
0e8
0e9
0e9
0e9
0ea
0ea
0ea
0ea
0eb
0eb
0eb
0ec
0ec
0ec
0ec
0ed
0ed
0ed
0ee
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
0df
0df
0df
0df
0df
0df
0df
0df
0df
0de
0de
0de
0de
0de
0de
0de
0de
0de
0de
0de
0de
0dd
0dd
0dd
0dd
0dd
0dd
0dd
0dd
0dc
0dc
0dc
0dc
0dc
0dc
0db
0db
0db
0db
0da
0da
0da
0da
0d9
0d9
0d9
0d9
0d8
0d8
0d8
0d7
0d7
0d6
0d6
0d5
0d5
0d5
0d4
0d4
0d3
0d3
0d2
0d2
0d2
0d1
0d0
0cf
0ce
0cd
0cb
0ca
0c9
0c7
0c6
0c5
0c4
0c3
0c2
0c1
0c0
0bf
0bb
0b8
0b6
0b3
0b1
0af
0ab
0a8
0a6
0a3
0a1
09e
09b
098
095
092
08d
087
082
07b
075
071
06a
064
060
059
053
04e
047
042
03c
036
02b
020
014
000
000
000
000
000
000
000
000
000
000
000
000
