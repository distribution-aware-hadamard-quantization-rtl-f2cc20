000
00d
019
026
032
03f
04b
058
064
071
07e
08a
097
0a3
0b0
0bc
0c9
0d5
0e2
0ee
0fb
107
113
120
12c
139
145
152
15e
16a
177
183
18f
19c
1a8
1b4
1c1
1cd
1d9
1e5
1f1
1fe
20a
216
222
22e
23a
246
252
25e
26a
276
282
28e
29a
2a6
2b2
2bd
2c9
2d5
2e1
2ec
2f8
304
30f
31b
327
332
33e
349
354
360
36b
377
382
38d
398
3a4
3af
3ba
3c5
3d0
3db
3e6
3f1
3fc
407
412
41c
427
432
43d
447
452
45c
467
471
47c
486
490
49b
4a5
4af
4b9
4c3
4cd
4d7
4e1
4eb
4f5
4ff
509
513
51c
526
530
539
543
54c
555
55f
568
571
57a
583
58d
596
59f
5a7
5b0
5b9
5c2
5cb
5d3
5dc
5e4
5ed
5f5
5fd
606
60e
616
61e
626
62e
636
63e
646
64e
655
65d
665
66c
674
67b
682
68a
691
698
69f
6a6
6ad
6b4
6bb
6c1
6c8
6cf
6d5
6dc
6e2
6e9
6ef
6f5
6fb
701
707
70d
713
719
71f
724
72a
730
735
73a
740
745
74a
74f
754
759
75e
763
768
76d
771
776
77a
77f
783
787
78c
790
794
798
79c
79f
7a3
7a7
7aa
7ae
7b1
7b5
7b8
7bb
7bf
7c2
7c5
7c8
7ca
7cd
7d0
7d3
7d5
7d8
7da
7dc
7df
7e1
7e3
7e5
7e7
7e9
7eb
7ec
7ee
7f0
7f1
7f3
7f4
7f5
7f6
7f7
7f8
7f9
7fa
7fb
7fc
7fd
7fd
7fe
7fe
7fe
7ff
7ff
7ff
7ff
