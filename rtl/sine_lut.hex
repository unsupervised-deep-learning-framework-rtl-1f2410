002
005
008
00b
00e
011
014
018
01b
01e
021
024
027
02a
02e
031
034
037
03a
03d
040
043
047
04a
04d
050
053
056
059
05d
060
063
066
069
06c
06f
073
076
079
07c
07f
082
085
088
08c
08f
092
095
098
09b
09e
0a2
0a5
0a8
0ab
0ae
0b1
0b4
0b7
0bb
0be
0c1
0c4
0c7
0ca
0cd
0d0
0d4
0d7
0da
0dd
0e0
0e3
0e6
0e9
0ed
0f0
0f3
0f6
0f9
0fc
0ff
102
105
109
10c
10f
112
115
118
11b
11e
121
125
128
12b
12e
131
134
137
13a
13d
141
144
147
14a
14d
150
153
156
159
15c
160
163
166
169
16c
16f
172
175
178
17b
17e
181
185
188
18b
18e
191
194
197
19a
19d
1a0
1a3
1a6
1a9
1ad
1b0
1b3
1b6
1b9
1bc
1bf
1c2
1c5
1c8
1cb
1ce
1d1
1d4
1d7
1db
1de
1e1
1e4
1e7
1ea
1ed
1f0
1f3
1f6
1f9
1fc
1ff
202
205
208
20b
20e
211
214
217
21a
21d
220
223
226
22a
22d
230
233
236
239
23c
23f
242
245
248
24b
24e
251
254
257
25a
25d
260
263
266
269
26c
26f
272
275
278
27b
27e
281
284
287
28a
28d
290
292
295
298
29b
29e
2a1
2a4
2a7
2aa
2ad
2b0
2b3
2b6
2b9
2bc
2bf
2c2
2c5
2c8
2cb
2ce
2d1
2d4
2d6
2d9
2dc
2df
2e2
2e5
2e8
2eb
2ee
2f1
2f4
2f7
2fa
2fc
2ff
302
305
308
30b
30e
311
314
317
319
31c
31f
322
325
328
32b
32e
331
333
336
339
33c
33f
342
345
348
34a
34d
350
353
356
359
35c
35e
361
364
367
36a
36d
36f
372
375
378
37b
37e
380
383
386
389
38c
38f
391
394
397
39a
39d
39f
3a2
3a5
3a8
3ab
3ad
3b0
3b3
3b6
3b8
3bb
3be
3c1
3c4
3c6
3c9
3cc
3cf
3d1
3d4
3d7
3da
3dc
3df
3e2
3e5
3e7
3ea
3ed
3f0
3f2
3f5
3f8
3fb
3fd
400
403
405
408
40b
40e
410
413
416
418
41b
41e
420
423
426
428
42b
42e
430
433
436
439
43b
43e
440
443
446
448
44b
44e
450
453
456
458
45b
45e
460
463
465
468
46b
46d
470
473
475
478
47a
47d
480
482
485
487
48a
48d
48f
492
494
497
499
49c
49f
4a1
4a4
4a6
4a9
4ab
4ae
4b0
4b3
4b5
4b8
4bb
4bd
4c0
4c2
4c5
4c7
4ca
4cc
4cf
4d1
4d4
4d6
4d9
4db
4de
4e0
4e3
4e5
4e8
4ea
4ed
4ef
4f2
4f4
4f6
4f9
4fb
4fe
500
503
505
508
50a
50d
50f
511
514
516
519
51b
51d
520
522
525
527
52a
52c
52e
531
533
535
538
53a
53d
53f
541
544
546
548
54b
54d
54f
552
554
557
559
55b
55e
560
562
564
567
569
56b
56e
570
572
575
577
579
57c
57e
580
582
585
587
589
58b
58e
590
592
594
597
599
59b
59d
5a0
5a2
5a4
5a6
5a9
5ab
5ad
5af
5b1
5b4
5b6
5b8
5ba
5bc
5bf
5c1
5c3
5c5
5c7
5c9
5cc
5ce
5d0
5d2
5d4
5d6
5d9
5db
5dd
5df
5e1
5e3
5e5
5e7
5ea
5ec
5ee
5f0
5f2
5f4
5f6
5f8
5fa
5fc
5ff
601
603
605
607
609
60b
60d
60f
611
613
615
617
619
61b
61d
61f
621
623
625
627
629
62b
62d
62f
631
633
635
637
639
63b
63d
63f
641
643
645
647
649
64b
64d
64f
651
653
654
656
658
65a
65c
65e
660
662
664
666
667
669
66b
66d
66f
671
673
675
676
678
67a
67c
67e
680
681
683
685
687
689
68a
68c
68e
690
692
693
695
697
699
69b
69c
69e
6a0
6a2
6a3
6a5
6a7
6a9
6aa
6ac
6ae
6b0
6b1
6b3
6b5
6b6
6b8
6ba
6bc
6bd
6bf
6c1
6c2
6c4
6c6
6c7
6c9
6cb
6cc
6ce
6d0
6d1
6d3
6d4
6d6
6d8
6d9
6db
6dd
6de
6e0
6e1
6e3
6e5
6e6
6e8
6e9
6eb
6ec
6ee
6f0
6f1
6f3
6f4
6f6
6f7
6f9
6fa
6fc
6fe
6ff
701
702
704
705
707
708
70a
70b
70d
70e
710
711
712
714
715
717
718
71a
71b
71d
71e
71f
721
722
724
725
727
728
729
72b
72c
72e
72f
730
732
733
734
736
737
738
73a
73b
73c
73e
73f
740
742
743
744
746
747
748
74a
74b
74c
74d
74f
750
751
753
754
755
756
758
759
75a
75b
75d
75e
75f
760
761
763
764
765
766
767
769
76a
76b
76c
76d
76e
770
771
772
773
774
775
776
778
779
77a
77b
77c
77d
77e
77f
780
781
783
784
785
786
787
788
789
78a
78b
78c
78d
78e
78f
790
791
792
793
794
795
796
797
798
799
79a
79b
79c
79d
79e
79f
7a0
7a1
7a2
7a3
7a4
7a5
7a5
7a6
7a7
7a8
7a9
7aa
7ab
7ac
7ad
7ae
7ae
7af
7b0
7b1
7b2
7b3
7b4
7b4
7b5
7b6
7b7
7b8
7b9
7b9
7ba
7bb
7bc
7bd
7bd
7be
7bf
7c0
7c1
7c1
7c2
7c3
7c4
7c4
7c5
7c6
7c7
7c7
7c8
7c9
7c9
7ca
7cb
7cc
7cc
7cd
7ce
7ce
7cf
7d0
7d0
7d1
7d2
7d2
7d3
7d4
7d4
7d5
7d5
7d6
7d7
7d7
7d8
7d9
7d9
7da
7da
7db
7dc
7dc
7dd
7dd
7de
7de
7df
7e0
7e0
7e1
7e1
7e2
7e2
7e3
7e3
7e4
7e4
7e5
7e5
7e6
7e6
7e7
7e7
7e8
7e8
7e9
7e9
7ea
7ea
7ea
7eb
7eb
7ec
7ec
7ed
7ed
7ed
7ee
7ee
7ef
7ef
7ef
7f0
7f0
7f1
7f1
7f1
7f2
7f2
7f2
7f3
7f3
7f3
7f4
7f4
7f4
7f5
7f5
7f5
7f6
7f6
7f6
7f6
7f7
7f7
7f7
7f8
7f8
7f8
7f8
7f9
7f9
7f9
7f9
7fa
7fa
7fa
7fa
7fa
7fb
7fb
7fb
7fb
7fb
7fc
7fc
7fc
7fc
7fc
7fc
7fd
7fd
7fd
7fd
7fd
7fd
7fd
7fe
7fe
7fe
7fe
7fe
7fe
7fe
7fe
7fe
7fe
7fe
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
7ff
